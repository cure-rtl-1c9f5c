// l2_cache: shared last-level cache with per-enclave access control and
// on-demand way partitioning (SP3).
//
// A set-associative, write-back, write-allocate cache between the memory
// arbiter and main memory. Besides tag, valid and dirty bits, every line keeps
// the 4-bit eid of the context that filled it (line eid). A request hits only
// in a way where the tag matches, the line eid equals the request's eid, and
// the way is among the ways the context may use (l2_way_alloc):
//   CP-BASIC  (default): all ways not owned exclusively by some enclave, so a
//             context hits only its own lines but may evict others' lines;
//   CP-STRICT: only the ways allocated exclusively to the enclave.
// A line whose tag matches but which fails the eid or way test is treated as a
// conflicting copy: it is written back if dirty and invalidated before the
// request is filled, so an address is never cached twice. Victims for fills
// are chosen by l2_evict_sel among the allowed ways only.
//
// Front side: one request/response link (cure_pkg), one request at a time,
// 64-bit words. Memory side: whole lines; mem_req carries a line address and
// for writes the line, and memory answers each request with mem_rsp_valid
// (read data for reads, an acknowledgement for writes).
// Timing: after reset the valid bits are cleared by a sweep of SETS cycles
// (req_ready low meanwhile). A hit is answered 2 cycles after acceptance
// (accept, lookup, response). A miss adds one memory read, and a write-back
// first if the victim is dirty; a conflicting copy adds its write-back.
// ev_* pulse once per request that hits at once, per fill (miss), per
// write-back and per conflicting copy found.
//
// Follows the design: line eid per entry, hit on tag and eid, CP-BASIC and
// CP-STRICT, restricted pseudo-random replacement, register lookup table by
// eid. Own choices: 64-byte lines, the blocking single-request organisation,
// the line-wide memory port and the handling of conflicting copies.
//
// Reset note: rst_n is also read by the assertions' disable iff, which lint
// reports as a synchronous use of an asynchronous reset; the flops use it
// asynchronously only.
module l2_cache
  import cure_pkg::*;
#(
  parameter int SIZE_KB           = 2048,
  parameter int WAYS              = 16,
  parameter int LINE_B            = 64,
  parameter int MAX_WAYS_PER_ENCL = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   req_valid,
  output logic                   req_ready,
  input  tl_req_t                req,
  output logic                   rsp_valid,
  input  logic                   rsp_ready,
  output tl_rsp_t                rsp,
  // main memory
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output logic                   mem_req_write,
  output addr_t                  mem_req_addr,
  output logic [LINE_B*8-1:0]    mem_req_wdata,
  input  logic                   mem_rsp_valid,
  input  logic [LINE_B*8-1:0]    mem_rsp_rdata,
  // partitioning configuration
  input  logic                   cfg_we,
  input  logic [CFG_IDX_W-1:0]   cfg_idx,
  input  logic [31:0]            cfg_wdata,
  output logic [31:0]            cfg_rdata,
  // events
  output logic                   ev_hit,
  output logic                   ev_miss,
  output logic                   ev_wb,
  output logic                   ev_conflict
);
  localparam int SETS  = SIZE_KB * 1024 / (WAYS * LINE_B);
  localparam int OFF_W = $clog2(LINE_B);
  localparam int IDX_W = $clog2(SETS);
  localparam int TAG_W = ADDR_W - IDX_W - OFF_W;
  localparam int WW    = $clog2(WAYS);
  localparam int LBITS = LINE_B * 8;
  localparam int WRDS  = LINE_B / (DATA_W / 8);
  localparam int WSELW = $clog2(WRDS);

  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [LBITS-1:0] line_t;

  // directory and data
  tag_t            tag_a  [SETS][WAYS];
  eid_t            leid_a [SETS][WAYS];
  logic [WAYS-1:0] valid_a [SETS];
  logic [WAYS-1:0] dirty_a [SETS];
  line_t           data_a [SETS*WAYS];

  typedef enum logic [2:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_WB, S_WB_WAIT, S_FILL, S_FILL_WAIT, S_RESP
  } state_e;
  state_e state_q;

  tl_req_t          req_q;
  logic [IDX_W-1:0] init_q;
  logic [WW-1:0]    victim_q;
  logic             evict_only_q;
  logic             first_q;      // lookup of a newly accepted request
  tl_rsp_t          rsp_q;

  wire [IDX_W-1:0] set   = req_q.addr[OFF_W +: IDX_W];
  wire tag_t       tag   = req_q.addr[ADDR_W-1 -: TAG_W];
  wire [WSELW-1:0] wsel  = req_q.addr[OFF_W-1 -: WSELW];

  // allocation state and eviction logic
  logic [WAYS-1:0] allowed, excl_w, unalloc_w;
  eid_t            way_eid_w [WAYS];
  logic [WW-1:0]   rnd_victim;
  logic            no_way;
  logic            pick_victim;

  l2_way_alloc #(.WAYS(WAYS), .MAX_WAYS_PER_ENCL(MAX_WAYS_PER_ENCL)) u_alloc (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_wdata, .cfg_rdata,
    .lookup_eid(req_q.eid), .allowed_ways(allowed),
    .excl(excl_w), .way_eid(way_eid_w), .unalloc(unalloc_w)
  );

  l2_evict_sel #(.WAYS(WAYS)) u_evict (
    .clk, .rst_n, .advance(pick_victim), .allowed, .valid(valid_a[set]),
    .victim(rnd_victim), .none(no_way)
  );

  // access-control lookup
  logic [WAYS-1:0] tmatch, hitv, confv;
  logic [WW-1:0]   hit_way, conf_way;
  always_comb begin
    hit_way  = '0;
    conf_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      tmatch[w] = valid_a[set][w] && (tag_a[set][w] == tag);
      hitv[w]   = tmatch[w] && (leid_a[set][w] == req_q.eid) && allowed[w];
      confv[w]  = tmatch[w] && !hitv[w];
    end
    for (int w = WAYS-1; w >= 0; w--) begin
      if (hitv[w])  hit_way  = WW'(w);
      if (confv[w]) conf_way = WW'(w);
    end
  end

  wire in_lookup = (state_q == S_LOOKUP);
  wire hit       = |hitv;
  assign pick_victim = in_lookup && !hit && !(|confv);

  line_t hit_line, merged, vic_line;
  always_comb begin
    hit_line = data_a[int'(hit_way) * SETS + int'(set)];
    vic_line = data_a[int'(victim_q) * SETS + int'(set)];
    merged   = hit_line;
    for (int b = 0; b < DATA_W / 8; b++)
      if (req_q.mask[b]) merged[int'(wsel) * DATA_W + b * 8 +: 8] = req_q.data[b*8 +: 8];
  end

  always_ff @(posedge clk) begin
    if (in_lookup && hit && is_write(req_q.op))
      data_a[int'(hit_way) * SETS + int'(set)] <= merged;
    if (state_q == S_FILL_WAIT && mem_rsp_valid)
      data_a[int'(victim_q) * SETS + int'(set)] <= mem_rsp_rdata;
  end

  always_ff @(posedge clk) begin
    if (state_q == S_FILL_WAIT && mem_rsp_valid) begin
      tag_a[set][victim_q]  <= tag;
      leid_a[set][victim_q] <= req_q.eid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_INIT;
      init_q       <= '0;
      req_q        <= '0;
      victim_q     <= '0;
      evict_only_q <= 1'b0;
      rsp_q        <= '0;
      first_q      <= 1'b0;
    end else begin
      if (state_q == S_IDLE)   first_q <= 1'b1;
      if (state_q == S_LOOKUP) first_q <= 1'b0;
      unique case (state_q)
        S_INIT: begin
          valid_a[init_q] <= '0;
          dirty_a[init_q] <= '0;
          init_q          <= init_q + 1'b1;
          if (int'(init_q) == SETS-1) state_q <= S_IDLE;
        end
        S_IDLE: if (req_valid) begin
          req_q   <= req;
          state_q <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (hit) begin
            rsp_q.data   <= hit_line[int'(wsel) * DATA_W +: DATA_W];
            rsp_q.source <= req_q.source;
            if (is_write(req_q.op)) dirty_a[set][hit_way] <= 1'b1;
            state_q <= S_RESP;
          end else if (|confv) begin
            victim_q     <= conf_way;
            evict_only_q <= 1'b1;
            if (dirty_a[set][conf_way]) state_q <= S_WB;
            else valid_a[set][conf_way] <= 1'b0;     // re-lookup next cycle
          end else begin
            victim_q     <= rnd_victim;
            evict_only_q <= 1'b0;
            if (valid_a[set][rnd_victim] && dirty_a[set][rnd_victim]) state_q <= S_WB;
            else begin
              valid_a[set][rnd_victim] <= 1'b0;
              state_q <= S_FILL;
            end
          end
        end
        S_WB:      if (mem_req_ready) state_q <= S_WB_WAIT;
        S_WB_WAIT: if (mem_rsp_valid) begin
          valid_a[set][victim_q] <= 1'b0;
          dirty_a[set][victim_q] <= 1'b0;
          state_q <= evict_only_q ? S_LOOKUP : S_FILL;
        end
        S_FILL:    if (mem_req_ready) state_q <= S_FILL_WAIT;
        S_FILL_WAIT: if (mem_rsp_valid) begin
          valid_a[set][victim_q] <= 1'b1;
          dirty_a[set][victim_q] <= 1'b0;
          state_q <= S_LOOKUP;
        end
        S_RESP: if (rsp_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign req_ready     = (state_q == S_IDLE);
  assign rsp_valid     = (state_q == S_RESP);
  assign rsp           = rsp_q;

  assign mem_req_valid = (state_q == S_WB) || (state_q == S_FILL);
  assign mem_req_write = (state_q == S_WB);
  assign mem_req_addr  = (state_q == S_WB)
                       ? {tag_a[set][victim_q], set, {OFF_W{1'b0}}}
                       : {tag, set, {OFF_W{1'b0}}};
  assign mem_req_wdata = vic_line;

  assign ev_hit      = in_lookup && hit && first_q;
  assign ev_miss     = (state_q == S_FILL) && mem_req_ready;
  assign ev_wb       = (state_q == S_WB) && mem_req_ready;
  assign ev_conflict = in_lookup && !hit && (|confv);

  // a hit never lands outside the ways the context may use
  a_hit_allowed: assert property (@(posedge clk) disable iff (!rst_n)
    (in_lookup && hit) |-> allowed[hit_way]);
  a_victim_allowed: assert property (@(posedge clk) disable iff (!rst_n)
    pick_victim |-> (!no_way && allowed[rnd_victim]));
  // the way directory: a hit or a victim in an exclusive way belongs to the
  // requesting enclave, and exactly the allocated ways are exclusive
  a_excl_hit: assert property (@(posedge clk) disable iff (!rst_n)
    (in_lookup && hit && excl_w[hit_way]) |-> way_eid_w[hit_way] == req_q.eid);
  a_excl_victim: assert property (@(posedge clk) disable iff (!rst_n)
    (pick_victim && excl_w[rnd_victim]) |-> way_eid_w[rnd_victim] == req_q.eid);
  a_excl_alloc: assert property (@(posedge clk) disable iff (!rst_n)
    excl_w == ~unalloc_w);

endmodule
