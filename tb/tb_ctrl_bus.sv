// tb_ctrl_bus: self-checking test of the configuration front end. Writes to
// each primitive's block must strobe only that primitive with the register
// index from address bits 8:3 and the low data word; reads must return that
// primitive's register one cycle later. Violation pulses must set sticky
// status bits and the interrupt, record the address, and a write of ones to
// the status register must clear them.
module tb_ctrl_bus;
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
  logic [3:0] cfg_we;
  logic [5:0] cfg_idx;
  logic [31:0] cfg_wdata, cfg_rdata [4];
  logic [3:0] viol = '0;
  addr_t viol_addr [4];
  logic irq;

  ctrl_bus dut (.*);

  // model registers: value = block*1000 + index
  always_comb for (int b = 0; b < 4; b++) cfg_rdata[b] = 32'(b * 1000 + int'(cfg_idx));

  initial begin
    repeat (300) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input bit wr, input int blk, input int idx, input logic [63:0] d, output logic [63:0] r);
    req = '0; req.op = wr ? OP_PUT : OP_GET;
    req.addr = 32'h1000_0000 | 32'(blk << 9) | 32'(idx << 3); req.data = d; req.mask = '1;
    @(negedge clk); req_valid = 1; #1;
    chk(req_ready, "accepted");
    if (wr) begin
      chk(cfg_we == (blk < 4 ? 4'(1 << blk) : 4'h0), $sformatf("strobe blk %0d", blk));
      chk(cfg_idx == 6'(idx) && cfg_wdata == d[31:0], "index and data");
    end else chk(cfg_we == 0, "no strobe on read");
    @(negedge clk); req_valid = 0; #1;
    chk(rsp_valid, "answered next cycle");
    r = rsp.data;
    @(negedge clk);
  endtask

  initial begin
    logic [63:0] r;
    req = '0;
    for (int i = 0; i < 4; i++) viol_addr[i] = 32'(32'h8000_0000 + i * 16);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 4; b++) begin
      access(1, b, 5 + b, 64'hFFFF_0000_1234_0000 + 64'(b), r);
      access(0, b, 7 + b, 0, r);
      chk(r == 64'(b * 1000 + 7 + b), $sformatf("read blk %0d", b));
    end
    chk(!irq, "no interrupt yet");
    @(negedge clk); viol = 4'b0010; @(negedge clk); viol = 4'b0000; #1;
    chk(irq, "interrupt after peripheral violation");
    access(0, 4, 0, 0, r);
    chk(r == 64'h2, "status bit");
    access(0, 4, 1, 0, r);
    chk(r == 64'h8000_0010, "violation address");
    @(negedge clk); viol = 4'b0101; @(negedge clk); viol = 4'b0000;
    access(1, 4, 0, 64'h2, r);
    access(0, 4, 0, 0, r);
    chk(r == 64'h5, "write-1-to-clear clears only the written bit");
    access(1, 4, 0, 64'hF, r);
    #1 chk(!irq, "interrupt cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
