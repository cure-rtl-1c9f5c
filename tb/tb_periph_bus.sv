// tb_periph_bus: self-checking test of the MMIO bus. Page 0 must reach the
// control bus, pages 1..3 the three peripherals, any other page must be
// answered by the bus with zero data one cycle after acceptance. Responses
// must come from the addressed target only.
module tb_periph_bus;
  import cure_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  tl_req_t req;
  tl_rsp_t rsp;
  logic [2:0] p_req_valid, p_req_ready = '1, p_rsp_valid = '0, p_rsp_ready;
  tl_req_t p_req;
  tl_rsp_t p_rsp [3];
  logic c_req_valid, c_req_ready = 1, c_rsp_valid = 0, c_rsp_ready;
  tl_req_t c_req;
  tl_rsp_t c_rsp;

  periph_bus #(.N_PERIPH(3)) dut (.*);

  initial begin
    repeat (300) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // target -1 = unmapped, 0 = control, k = peripheral k-1
  task automatic xact(input addr_t a, input int t);
    req = '0; req.op = OP_GET; req.addr = a; req.source = 2'd1;
    @(negedge clk); req_valid = 1; #1;
    chk(req_ready, "accepted");
    chk(c_req_valid == (t == 0), $sformatf("ctrl select %h", a));
    for (int k = 0; k < 3; k++) chk(p_req_valid[k] == (t == k+1), $sformatf("periph %0d select %h", k, a));
    @(negedge clk); req_valid = 0;
    if (t < 0) begin
      #1 chk(rsp_valid && rsp.data == 0 && rsp.source == 2'd1, "unmapped answers zero next cycle");
    end else begin
      #1 chk(!rsp_valid, "waits for target");
      // all targets raise a response, only the addressed one may pass
      c_rsp_valid = 1; p_rsp_valid = '1; #1;
      chk(rsp_valid && rsp.data == 64'(100 + t), "response from target");
    end
    @(negedge clk); c_rsp_valid = 0; p_rsp_valid = '0;
  endtask

  initial begin
    req = '0;
    c_rsp = '{data: 64'd100, source: 2'd1};
    for (int k = 0; k < 3; k++) p_rsp[k] = '{data: 64'(101 + k), source: 2'd1};
    repeat (2) @(negedge clk); rst_n = 1;
    xact(32'h1000_0010, 0);
    xact(32'h1000_1000, 1);
    xact(32'h1000_2FF8, 2);
    xact(32'h1000_3008, 3);
    xact(32'h1000_4000, -1);
    xact(32'h1000_F000, -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
