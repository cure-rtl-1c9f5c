// tb_l2_evict_sel: self-checking test of the restricted pseudo-random victim
// choice. For many random allowed/valid masks the victim must be allowed,
// must be the lowest allowed empty way when one exists, and over many steps
// with all ways full every allowed way must be picked at some point.
module tb_l2_evict_sel;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic advance = 0;
  logic [15:0] allowed, valid;
  logic [3:0] victim;
  logic none;

  l2_evict_sel #(.WAYS(16)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] seen;
    allowed = '1; valid = '1;
    repeat (2) @(negedge clk); rst_n = 1;
    advance = 1;
    for (int i = 0; i < 300; i++) begin
      int lowest_empty;
      allowed = 16'($urandom) | 16'(1 << ($urandom % 16));
      valid   = ($urandom % 2) ? '1 : 16'($urandom);
      #1;
      lowest_empty = -1;
      for (int w = 15; w >= 0; w--) if (allowed[w] && !valid[w]) lowest_empty = w;
      chk(allowed[victim], "victim allowed");
      if (lowest_empty >= 0) chk(int'(victim) == lowest_empty, "empty way first");
      chk(!none, "none low");
      @(negedge clk);
    end
    // coverage of a 3-way subset when full
    seen = '0; allowed = 16'h0B00; valid = '1;
    for (int i = 0; i < 200; i++) begin
      #1 seen[victim] = 1'b1;
      @(negedge clk);
    end
    chk(seen == 16'h0B00, "all allowed ways used and no other");
    allowed = '0; #1 chk(none, "none when no way allowed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
