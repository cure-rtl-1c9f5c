// l2_way_alloc: way-allocation state of the partitioned shared cache (SP3).
//
// Holds, as registers:
//   * a lookup table indexed by eid with one mode bit (1 = CP-STRICT) and the
//     set of cache ways allocated to that enclave;
//   * per way, an excl bit (way owned exclusively) and the owner eid;
//   * the vector of unallocated ways (all ways after reset).
// From the table it tells the cache which ways a request may hit and fill:
// for an enclave in CP-STRICT that owns ways, only its own ways; for everyone
// else (CP-BASIC) every way that is not exclusively owned.
//
// Commands (cfg index, data fields):
//   0 MODE    eid = wdata[3:0], mode = wdata[4]. Clearing the mode releases
//             the enclave's ways.
//   1 ALLOC   eid = wdata[3:0], n = wdata[12:8]. Allocates the n lowest free
//             ways if the enclave is in CP-STRICT, n free ways exist beyond
//             the RESERVE ways kept for shared use, and the enclave then owns
//             no more than MAX_WAYS_PER_ENCL. Otherwise nothing changes.
//   2 RELEASE eid = wdata[3:0]. Returns all ways of the enclave.
// Reads: index 0 = {31: last command succeeded}, 3 = unallocated vector,
// 16+e = {16: mode of e, 15:0 ways of e}.
// Timing: a command takes effect at the edge of the write; lookup is
// combinational.
//
// Follows the design: mode bit and way IDs per enclave, excl and way eid per
// way, unallocated-ways vector, allocation only if available and below a
// maximum. Own choices: the maximum (8), keeping one way unallocated so that
// contexts in CP-BASIC can always be cached, releasing on mode clear, the
// command encoding, and treating a CP-STRICT enclave that owns no way as
// CP-BASIC.
//
// Reset note: rst_n is also read by the assertions' disable iff, which lint
// reports as a synchronous use of an asynchronous reset; the flops use it
// asynchronously only.
module l2_way_alloc
  import cure_pkg::*;
#(
  parameter int WAYS              = 16,
  parameter int MAX_WAYS_PER_ENCL = 8,
  parameter int RESERVE           = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [CFG_IDX_W-1:0] cfg_idx,
  input  logic [31:0]          cfg_wdata,
  output logic [31:0]          cfg_rdata,
  input  eid_t                 lookup_eid,
  output logic [WAYS-1:0]      allowed_ways,
  output logic [WAYS-1:0]      excl,
  output eid_t                 way_eid [WAYS],
  output logic [WAYS-1:0]      unalloc
);
  localparam int NE = 1 << EID_W;

  logic [NE-1:0]   mode_q;
  logic [WAYS-1:0] lut_q [NE];
  logic            ok_q;

  function automatic int popc(logic [WAYS-1:0] v);
    int c = 0;
    for (int i = 0; i < WAYS; i++) c += int'(v[i]);
    return c;
  endfunction

  // lowest n free ways
  logic [WAYS-1:0] pick;
  logic            can_alloc;
  eid_t            c_eid;
  int              c_n;
  assign c_eid = eid_t'(cfg_wdata[EID_W-1:0]);
  assign c_n   = int'(cfg_wdata[12:8]);
  always_comb begin
    int got;
    got  = 0;
    pick = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (unalloc[w] && got < c_n) begin
        pick[w] = 1'b1;
        got++;
      end
    end
    can_alloc = mode_q[c_eid] && c_n > 0 &&
                popc(unalloc) - c_n >= RESERVE &&
                popc(lut_q[c_eid]) + c_n <= MAX_WAYS_PER_ENCL;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q  <= '0;
      ok_q    <= 1'b0;
      unalloc <= '1;
      excl    <= '0;
      for (int e = 0; e < NE; e++) lut_q[e] <= '0;
      for (int w = 0; w < WAYS; w++) way_eid[w] <= EID_OS;
    end else if (cfg_we) begin
      unique case (cfg_idx)
        6'd0: begin
          mode_q[c_eid] <= cfg_wdata[4];
          ok_q          <= 1'b1;
          if (!cfg_wdata[4]) begin
            unalloc      <= unalloc | lut_q[c_eid];
            excl         <= excl & ~lut_q[c_eid];
            lut_q[c_eid] <= '0;
          end
        end
        6'd1: begin
          ok_q <= can_alloc;
          if (can_alloc) begin
            unalloc      <= unalloc & ~pick;
            excl         <= excl | pick;
            lut_q[c_eid] <= lut_q[c_eid] | pick;
            for (int w = 0; w < WAYS; w++) if (pick[w]) way_eid[w] <= c_eid;
          end
        end
        6'd2: begin
          ok_q         <= 1'b1;
          unalloc      <= unalloc | lut_q[c_eid];
          excl         <= excl & ~lut_q[c_eid];
          lut_q[c_eid] <= '0;
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    if (mode_q[lookup_eid] && lut_q[lookup_eid] != '0) allowed_ways = lut_q[lookup_eid];
    else                                               allowed_ways = ~excl;
  end

  always_comb begin
    cfg_rdata = '0;
    if (cfg_idx == 6'd0)      cfg_rdata[31] = ok_q;
    else if (cfg_idx == 6'd3) cfg_rdata = 32'(unalloc);
    else if (cfg_idx >= 6'd16 && cfg_idx < 6'(16 + NE)) begin
      cfg_rdata        = 32'(lut_q[cfg_idx[EID_W-1:0]]);
      cfg_rdata[16]    = mode_q[cfg_idx[EID_W-1:0]];
    end
  end

  // the per-way directory and the lookup table always agree
  a_consistent: assert property (@(posedge clk) disable iff (!rst_n)
    (excl & unalloc) == '0);

endmodule
