// tb_l2_cache: self-checking test of the partitioned shared cache, at a
// reduced size (4 KiB, 4 ways, 64-byte lines: 16 sets).
// A behavioural line memory answers two cycles after each request. A flat
// word-level reference model gives the expected read data. Checks:
//   * miss then hit, hit answered 2 cycles after acceptance;
//   * byte-masked writes;
//   * a line filled by one eid is not hit by another: the other eid causes a
//     conflict, the dirty line is written back and the data stays coherent;
//   * a dirty victim is written back when a set overflows;
//   * CP-STRICT: an enclave with one exclusive way thrashes only that way and
//     cannot evict the lines of other contexts in the same set;
//   * random mixed traffic from several eids matches the reference model.
module tb_l2_cache;
  import cure_pkg::*;
  localparam int LINE_B = 64;
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

  l2_cache #(.SIZE_KB(4), .WAYS(4), .LINE_B(LINE_B), .MAX_WAYS_PER_ENCL(2)) dut (.*);

  // ---------------- behavioural main memory ----------------
  line_t mem [addr_t];
  function automatic data_t init_word(addr_t wa);
    return {wa, ~wa};
  endfunction
  function automatic line_t mem_line(addr_t la);
    line_t l;
    if (mem.exists(la)) return mem[la];
    for (int w = 0; w < LINE_B/8; w++) l[w*64 +: 64] = init_word(la + addr_t'(w*8));
    return l;
  endfunction
  always @(posedge clk) begin
    if (mem_req_valid && mem_req_ready) begin
      addr_t a; bit wr; line_t d;
      a = mem_req_addr; wr = mem_req_write; d = mem_req_wdata;
      chk(a[5:0] == 0, "line-aligned memory request");
      @(posedge clk);
      @(negedge clk);
      if (wr) mem[a] = d;
      else    mem_rsp_rdata = mem_line(a);
      mem_rsp_valid = 1;
      @(negedge clk);
      mem_rsp_valid = 0;
    end
  end

  // ---------------- reference model and event counters ----------------
  data_t refm [addr_t];
  function automatic data_t ref_rd(addr_t wa);
    return refm.exists(wa) ? refm[wa] : init_word(wa);
  endfunction
  int n_hit, n_miss, n_wb, n_conf;
  always @(posedge clk) begin
    n_hit  += int'(ev_hit);  n_miss += int'(ev_miss);
    n_wb   += int'(ev_wb);   n_conf += int'(ev_conflict);
  end

  int last_lat;
  task automatic acc(input eid_t e, input bit wr, input addr_t a, input data_t d,
                     input logic [7:0] m, output data_t r);
    int t0;
    req = '0; req.op = wr ? OP_PUT : OP_GET; req.addr = a; req.data = d; req.mask = m; req.eid = e;
    @(negedge clk); req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    t0 = 1;
    while (!rsp_valid) begin @(negedge clk); t0++; end
    last_lat = t0;
    r = rsp.data;
    if (wr) begin
      data_t o;
      o = ref_rd(a);
      for (int b = 0; b < 8; b++) if (m[b]) o[b*8 +: 8] = d[b*8 +: 8];
      refm[a] = o;
    end else begin
      chk(r == ref_rd(a), $sformatf("read eid=%h addr=%h got %h exp %h", e, a, r, ref_rd(a)));
    end
    @(negedge clk);
  endtask
  task automatic rd(input eid_t e, input addr_t a);
    data_t r; acc(e, 0, a, '0, '0, r);
  endtask
  task automatic wrt(input eid_t e, input addr_t a, input data_t d, input logic [7:0] m);
    data_t r; acc(e, 1, a, d, m, r);
  endtask
  task automatic cfg(input int idx, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_idx = 6'(idx); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam addr_t A = 32'h8000_0000;
  localparam addr_t SET_STRIDE = 32'h400;   // 16 sets * 64 B
  initial begin
    int h0, m0, w0, c0;
    req = '0; mem_rsp_rdata = '0;
    n_hit = 0; n_miss = 0; n_wb = 0; n_conf = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // 1. miss then hit
    m0 = n_miss; rd(4'h0, A + 8);
    chk(n_miss == m0 + 1, "first access misses");
    h0 = n_hit; rd(4'h0, A + 8);
    chk(n_hit == h0 + 1 && n_miss == m0 + 1, "second access hits");
    chk(last_lat == 2, $sformatf("hit latency 2 cycles, got %0d", last_lat));
    // 2. masked write
    wrt(4'h0, A + 8, 64'h1111_2222_3333_4444, 8'h0F);
    rd(4'h0, A + 8);
    // 3. another eid: conflict, write-back of the dirty line, coherent data
    w0 = n_wb; c0 = n_conf; h0 = n_hit;
    rd(4'h1, A + 8);
    chk(n_conf == c0 + 1 && n_wb == w0 + 1, "other eid: conflict with write-back");
    chk(mem[A][127:64] == ref_rd(A + 8), "written-back data in memory");
    c0 = n_conf; rd(4'h0, A + 16);
    chk(n_conf == c0 + 1, "owner changed, original eid conflicts again");
    // 4. set overflow evicts a dirty victim
    w0 = n_wb;
    for (int i = 0; i < 5; i++) wrt(4'h0, A + 32'h40 + addr_t'(i) * SET_STRIDE, 64'(i + 77), 8'hFF);
    chk(n_wb > w0, "dirty victim written back on overflow");
    for (int i = 0; i < 5; i++) rd(4'h0, A + 32'h40 + addr_t'(i) * SET_STRIDE);
    // 5. CP-STRICT isolation
    cfg(0, 32'h13);                  // enclave 3 strict
    cfg(1, 32'h3 | (1 << 8));        // one way
    cfg_idx = 0; #1 chk(cfg_rdata[31], "allocation ok");
    for (int i = 0; i < 3; i++) rd(4'h0, A + 32'h140 + addr_t'(i) * SET_STRIDE);
    for (int pass = 0; pass < 2; pass++) begin
      m0 = n_miss;
      for (int i = 0; i < 4; i++) rd(4'h3, A + 32'h140 + addr_t'(10 + i) * SET_STRIDE);
      if (pass == 1) chk(n_miss == m0 + 4, "strict enclave with one way thrashes its way");
    end
    h0 = n_hit;
    for (int i = 0; i < 3; i++) rd(4'h0, A + 32'h140 + addr_t'(i) * SET_STRIDE);
    chk(n_hit == h0 + 3, "strict enclave did not evict other contexts' lines");
    // contrast: a basic context in the same set does evict them
    for (int i = 0; i < 4; i++) rd(4'h5, A + 32'h140 + addr_t'(20 + i) * SET_STRIDE);
    h0 = n_hit;
    for (int i = 0; i < 3; i++) rd(4'h0, A + 32'h140 + addr_t'(i) * SET_STRIDE);
    chk(n_hit < h0 + 3, "basic context may evict other lines");
    // 6. random traffic
    for (int i = 0; i < 400; i++) begin
      eid_t e; addr_t a;
      e = eid_t'($urandom % 4);
      a = A + addr_t'(($urandom % 8) * SET_STRIDE) + addr_t'(($urandom % 3) * 64) + addr_t'(($urandom % 8) * 8);
      if ($urandom % 2) wrt(e, a, {$urandom, $urandom}, 8'($urandom));
      else rd(e, a);
    end
    $display("hits=%0d misses=%0d writebacks=%0d conflicts=%0d", n_hit, n_miss, n_wb, n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
