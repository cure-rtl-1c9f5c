// tb_eid_unit: self-checking test of the per-core enclave-ID register.
// Checks: reset to the monitor ID, permitted and refused writes of eid and
// mtvec, eid stamping of requests, the flush-before-set order on a trap into
// machine mode (eid must keep the old value until the flush is done, then be
// 0xF one cycle later; the flush is given the 3141 cycles the paper measured
// for an L1 flush) and that a trap taken by the monitor needs no flush.
module tb_eid_unit;
  import cure_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic csr_we = 0, trap_m = 0, l1_flush_done = 0;
  logic [11:0] csr_addr = '0;
  logic [31:0] csr_wdata = '0, csr_rdata, mtvec;
  logic csr_illegal, trap_busy, l1_flush_req;
  eid_t eid;
  tl_req_t core_req, tagged_req;

  eid_unit dut (.*);

  task automatic csr_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    core_req = '0;
    core_req.addr = 32'h8000_1234;
    core_req.eid  = 4'h7;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(eid == 4'hF, "reset eid is SM");
    chk(mtvec == 32'h8000_0000, "reset mtvec");
    chk(tagged_req.eid == 4'hF, "request stamped with SM id");
    chk(tagged_req.addr == 32'h8000_1234, "address passes");
    // monitor writes mtvec and eid
    csr_write(12'h305, 32'h8000_0100);
    chk(mtvec == 32'h8000_0100 && !csr_illegal, "SM writes mtvec");
    csr_write(12'h7C0, 32'h3);
    chk(eid == 4'h3 && !csr_illegal, "SM writes eid");
    chk(tagged_req.eid == 4'h3, "request stamped with enclave id");
    csr_addr = 12'h7C0; #1;
    chk(csr_rdata == 32'h3, "eid readable");
    // enclave tries to write both
    @(negedge clk); csr_we = 1; csr_addr = 12'h305; csr_wdata = 32'hDEAD_0000;
    @(negedge clk); csr_we = 0;
    chk(csr_illegal, "mtvec write refused is flagged");
    chk(mtvec == 32'h8000_0100, "mtvec unchanged outside SM");
    csr_write(12'h7C0, 32'hF);
    chk(eid == 4'h3, "enclave cannot set eid to SM");
    // trap into machine mode: flush first
    @(negedge clk); trap_m = 1;
    #1 chk(trap_busy, "trap_busy at trap");
    @(negedge clk); trap_m = 0;
    chk(l1_flush_req, "flush requested");
    // the L1 flush takes 3141 cycles, the cost measured in the paper
    begin
      int held;
      held = 0;
      for (int i = 0; i < 3141 - 1; i++) begin
        @(negedge clk);
        held += int'(eid == 4'h3 && l1_flush_req && trap_busy && tagged_req.eid == 4'h3);
      end
      chk(held == 3140, $sformatf("eid, stall and flush request held for the whole flush (%0d)", held));
    end
    l1_flush_done = 1;
    @(negedge clk); l1_flush_done = 0;
    chk(eid == 4'hF, "eid is SM one cycle after flush done");
    chk(!l1_flush_req && !trap_busy, "flush over");
    // trap while already in the monitor: nothing to flush
    @(negedge clk); trap_m = 1;
    @(negedge clk); trap_m = 0;
    chk(!l1_flush_req && eid == 4'hF, "no flush on trap inside SM");
    // unguarded CSR writes are never flagged
    csr_write(12'h340, 32'h1);
    chk(!csr_illegal, "other CSR not flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
