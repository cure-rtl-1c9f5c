// tb_sysbus_decoder: self-checking test of the core-side bus decoder.
// Sends memory and MMIO requests, checks that exactly the right side sees
// the request, that the response of that side (and not the other) comes
// back, that no new request is accepted while one is outstanding, and that
// the decoder adds no cycle (request visible in the same cycle).
module tb_sysbus_decoder;
  import cure_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic m_req_valid = 0, m_req_ready, m_rsp_valid, m_rsp_ready = 1;
  tl_req_t m_req;
  tl_rsp_t m_rsp;
  logic mem_req_valid, mem_req_ready = 1, mem_rsp_valid = 0, mem_rsp_ready;
  tl_req_t mem_req;
  tl_rsp_t mem_rsp;
  logic per_req_valid, per_req_ready = 1, per_rsp_valid = 0, per_rsp_ready;
  tl_req_t per_req;
  tl_rsp_t per_rsp;

  sysbus_decoder dut (.*);

  initial begin
    repeat (300) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input addr_t a, input bit is_mmio);
    m_req = '0; m_req.addr = a; m_req.eid = 4'h2;
    mem_rsp.data = 64'hAAAA; mem_rsp.source = 0;
    per_rsp.data = 64'hBBBB; per_rsp.source = 0;
    @(negedge clk); m_req_valid = 1; #1;
    chk(mem_req_valid == !is_mmio && per_req_valid == is_mmio, $sformatf("routing of %h", a));
    chk(m_req_ready, "accepted same cycle");
    chk((is_mmio ? per_req.addr : mem_req.addr) == a, "request passed unchanged");
    @(negedge clk); m_req_valid = 1; #1;
    chk(!m_req_ready && !mem_req_valid && !per_req_valid, "blocked while outstanding");
    m_req_valid = 0;
    // the wrong side responding must not reach the master
    if (is_mmio) mem_rsp_valid = 1; else per_rsp_valid = 1;
    #1 chk(!m_rsp_valid, "other side ignored");
    mem_rsp_valid = 0; per_rsp_valid = 0;
    @(negedge clk);
    if (is_mmio) per_rsp_valid = 1; else mem_rsp_valid = 1;
    #1 chk(m_rsp_valid && m_rsp.data == (is_mmio ? 64'hBBBB : 64'hAAAA), "response routed");
    @(negedge clk); per_rsp_valid = 0; mem_rsp_valid = 0;
  endtask

  initial begin
    m_req = '0; mem_rsp = '0; per_rsp = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    one(32'h8000_0040, 0);
    one(32'h1000_1008, 1);
    one(32'h0000_0100, 0);
    one(32'h1FFF_FFF8, 1);
    one(32'h2000_0000, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
