// tb_l2_partition: the shared-cache configuration of the paper's evaluation,
// run on l2_cache at its full default size (2 MiB, 16 ways, 64-byte lines:
// 2048 sets). An enclave gets 1/16 of the ways in CP-STRICT, as in the
// evaluation; a second enclave stays in CP-BASIC; the OS then streams through
// a working set as large as the whole cache.
// Phases and checks:
//   1. CP-STRICT enclave 1 is given one way; the lookup table must show the
//      mode and exactly one way, and the unallocated vector must lose it.
//   2. Enclave 1 reads 2048 lines (one per set: its whole way) - all miss;
//      reading them again must hit every time, each hit in 2 cycles.
//   3. CP-BASIC enclave 2 reads 2048 lines of its own (all miss).
//   4. The OS reads 32768 lines (2 MiB), filling every way it may use.
//   5. Enclave 1 reads its lines again: every one must still hit (the OS could
//      not evict them). Enclave 2 reads its lines: the OS has evicted some of
//      them (CP-BASIC lets others evict), so misses must occur.
//   6. Enclave 1 alternates two lines of one set: with a single way every
//      access must miss - the price of strict isolation the paper notes.
// Every read is compared with the memory model's content. The memory model
// answers in the cycle after it accepts a request and changes its outputs at
// rising edges only; the bus tasks sample at falling edges.
module tb_l2_partition;
  import cure_pkg::*;
  localparam int LINE_B = 64, SETS = 2048;
  typedef logic [LINE_B*8-1:0] line_t;
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
  logic mem_req_valid, mem_req_ready = 1, mem_req_write, mem_rsp_valid = 0;
  addr_t mem_req_addr;
  line_t mem_req_wdata, mem_rsp_rdata;
  logic cfg_we = 0;
  logic [5:0] cfg_idx = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  logic ev_hit, ev_miss, ev_wb, ev_conflict;

  l2_cache dut (.*);

  // main memory: read-only content {address, ~address} per 64-bit word
  function automatic line_t mem_line(addr_t la);
    line_t l;
    for (int w = 0; w < LINE_B/8; w++) l[w*64 +: 64] = {la + addr_t'(w*8), ~(la + addr_t'(w*8))};
    return l;
  endfunction
  addr_t m_a; bit m_pend = 0; int n_memwr = 0;
  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (m_pend) begin
      mem_rsp_rdata <= mem_line(m_a);
      mem_rsp_valid <= 1'b1;
      m_pend = 0;
    end
    if (mem_req_valid && mem_req_ready) begin
      m_a = mem_req_addr; m_pend = 1;
      if (mem_req_write) n_memwr++;
    end
  end

  int n_hit = 0, n_miss = 0;
  always @(posedge clk) begin
    n_hit  += int'(ev_hit);
    n_miss += int'(ev_miss);
  end

  int last_lat;
  task automatic rd(input eid_t e, input addr_t a);
    int t;
    req = '0; req.op = OP_GET; req.addr = a; req.mask = '1; req.eid = e;
    @(negedge clk); req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    t = 1;
    while (!rsp_valid) begin @(negedge clk); t++; end
    last_lat = t;
    checks++;
    if (rsp.data != {a, ~a}) begin
      failures++;
      $display("FAIL: read eid=%h addr=%h got %h", e, a, rsp.data);
    end
  endtask
  task automatic cfg(input int idx, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_idx = 6'(idx); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask
  // read n lines, one per set, from base; return hits and misses
  task automatic sweep(input eid_t e, input addr_t base, input int n,
                       output int hits, output int misses, output int max_hit_lat);
    int h0, m0;
    h0 = n_hit; m0 = n_miss; max_hit_lat = 0;
    for (int i = 0; i < n; i++) begin
      int hb;
      hb = n_hit;
      rd(e, base + addr_t'(i * LINE_B) + 8);
      @(negedge clk);
      if (n_hit != hb && last_lat > max_hit_lat) max_hit_lat = last_lat;
    end
    hits = n_hit - h0; misses = n_miss - m0;
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam addr_t E1 = 32'h8010_0000, E2 = 32'h8020_0000, OSB = 32'h8100_0000;
  initial begin
    int h, m, lat;
    req = '0; mem_rsp_rdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;

    // 1. enclave 1: CP-STRICT with one of 16 ways
    cfg(0, 32'h11);                 // MODE eid 1, CP-STRICT
    cfg(1, 32'h101);                // ALLOC eid 1, 1 way
    cfg_idx = 6'd0; #1;
    chk(cfg_rdata[31], "allocation of one way succeeds");
    cfg_idx = 6'd17; #1;
    chk(cfg_rdata[16] && $countones(cfg_rdata[15:0]) == 1, "enclave 1 in CP-STRICT owns one way");
    cfg_idx = 6'd3; #1;
    chk($countones(cfg_rdata[15:0]) == 15, "15 ways stay unallocated");

    // 2. enclave 1 fills its way, then hits every line
    sweep(4'h1, E1, SETS, h, m, lat);
    chk(m == SETS && h == 0, $sformatf("enclave 1 first pass: %0d misses", m));
    sweep(4'h1, E1, SETS, h, m, lat);
    chk(h == SETS && m == 0, $sformatf("enclave 1 second pass: %0d hits of %0d", h, SETS));
    chk(lat == 2, $sformatf("hit latency 2 cycles at full size, got %0d", lat));

    // 3. enclave 2 in CP-BASIC
    sweep(4'h2, E2, SETS, h, m, lat);
    chk(m == SETS, "enclave 2 first pass misses");

    // 4. the OS streams 2 MiB
    sweep(4'h0, OSB, 16 * SETS, h, m, lat);
    $display("OS stream: %0d hits, %0d misses", h, m);
    chk(m == 16 * SETS, "OS stream misses on every line");

    // 5. strict lines survive, basic lines were evicted
    sweep(4'h1, E1, SETS, h, m, lat);
    $display("enclave 1 (CP-STRICT) after OS stream: %0d hits, %0d misses", h, m);
    chk(h == SETS && m == 0, "CP-STRICT lines not evicted by the OS");
    sweep(4'h2, E2, SETS, h, m, lat);
    $display("enclave 2 (CP-BASIC) after OS stream: %0d hits, %0d misses", h, m);
    chk(m > 0, "CP-BASIC lines evicted by the OS");

    // 6. one way: two lines of one set evict each other
    begin
      int m0;
      m0 = n_miss;
      for (int i = 0; i < 8; i++) begin
        rd(4'h1, E1 + addr_t'(((i + 1) % 2) * SETS * LINE_B));
        @(negedge clk);
      end
      chk(n_miss - m0 == 8, $sformatf("one way: alternating lines always miss (%0d of 8)", n_miss - m0));
    end
    chk(n_memwr == 0, "clean lines are never written back");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
