// tb_l2_way_alloc: self-checking test of way allocation. Checks that ways are
// granted only in CP-STRICT mode, only when enough free ways remain beyond the
// one kept for shared use, and only up to 8 per enclave; that the lowest free
// ways are chosen; that allowed_ways gives a strict enclave its own ways and
// every other context the non-exclusive ways; and that release and clearing
// the mode return the ways.
module tb_l2_way_alloc;
  import cure_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic cfg_we = 0;
  logic [5:0] cfg_idx = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  eid_t lookup_eid = '0;
  logic [15:0] allowed_ways, excl, unalloc;
  eid_t way_eid [16];

  l2_way_alloc #(.WAYS(16), .MAX_WAYS_PER_ENCL(8)) dut (.*);

  task automatic cmd(input int idx, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_idx = 6'(idx); cfg_wdata = d;
    @(negedge clk); cfg_we = 0; cfg_idx = 0; #1;
  endtask
  function automatic logic [31:0] al(int e, int n); return 32'(e) | 32'(n << 8); endfunction

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1; #1;
    chk(unalloc == 16'hFFFF && excl == 0, "all ways free after reset");
    lookup_eid = 4'h3; #1 chk(allowed_ways == 16'hFFFF, "basic context may use all ways");
    cmd(1, al(3, 2));
    chk(cfg_rdata[31] == 0 && unalloc == 16'hFFFF, "no allocation without CP-STRICT");
    cmd(0, 32'h13);                       // eid 3 strict
    cmd(1, al(3, 2));
    chk(cfg_rdata[31] == 1, "allocation succeeds");
    chk(excl == 16'h0003 && unalloc == 16'hFFFC, "lowest two ways");
    chk(way_eid[0] == 3 && way_eid[1] == 3, "way owner");
    lookup_eid = 4'h3; #1 chk(allowed_ways == 16'h0003, "strict enclave gets its ways");
    lookup_eid = 4'h0; #1 chk(allowed_ways == 16'hFFFC, "OS gets the non-exclusive ways");
    cmd(1, al(3, 7));
    chk(cfg_rdata[31] == 0 && excl == 16'h0003, "maximum of 8 per enclave");
    cmd(1, al(3, 6));
    chk(cfg_rdata[31] == 1 && excl == 16'h00FF, "up to 8");
    cmd(0, 32'h14);
    cmd(1, al(4, 8));
    chk(cfg_rdata[31] == 0, "must keep one shared way");
    cmd(1, al(4, 7));
    chk(cfg_rdata[31] == 1 && excl == 16'h7FFF && unalloc == 16'h8000, "second enclave");
    lookup_eid = 4'h4; #1 chk(allowed_ways == 16'h7F00, "enclave 4 ways");
    lookup_eid = 4'h9; #1 chk(allowed_ways == 16'h8000, "others keep the shared way");
    cmd(16 + 4, 0);
    cfg_idx = 6'(16 + 4); #1 chk(cfg_rdata == 32'h0001_7F00, "table readback");
    cmd(2, 32'h3);
    chk(excl == 16'h7F00 && unalloc == 16'h80FF, "release returns ways");
    lookup_eid = 4'h3; #1 chk(allowed_ways == 16'h80FF, "strict without ways behaves as basic");
    cmd(0, 32'h04);
    chk(excl == 0 && unalloc == 16'hFFFF, "clearing mode releases");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
