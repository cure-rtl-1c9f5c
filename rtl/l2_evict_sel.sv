// l2_evict_sel: victim-way selection of the partitioned shared cache (SP3).
//
// The replacement is pseudo-random, restricted to the ways the requesting
// context may use (allowed). An allowed way that holds no valid line is taken
// first (lowest index). Otherwise a 16-bit Fibonacci LFSR (taps 16,14,13,11)
// gives a start way and the first allowed way at or after it, wrapping around,
// is the victim. The LFSR steps each time advance is high. none is high when
// no way is allowed.
// Timing: victim is combinational in allowed, valid and the LFSR state.
//
// Follows the design: pseudo-random replacement limited to the enclave's
// subset of ways. Own choices: the LFSR polynomial and preferring empty ways.
module l2_evict_sel #(
  parameter int WAYS = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    advance,
  input  logic [WAYS-1:0]         allowed,
  input  logic [WAYS-1:0]         valid,
  output logic [$clog2(WAYS)-1:0] victim,
  output logic                    none
);
  localparam int WW = $clog2(WAYS);
  logic [15:0] lfsr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       lfsr_q <= 16'hACE1;
    else if (advance) lfsr_q <= {lfsr_q[14:0], lfsr_q[15] ^ lfsr_q[13] ^ lfsr_q[12] ^ lfsr_q[10]};
  end

  always_comb begin
    logic          found;
    logic [WW-1:0] start;
    found  = 1'b0;
    victim = '0;
    start  = lfsr_q[WW-1:0];
    for (int w = 0; w < WAYS; w++) begin
      if (!found && allowed[w] && !valid[w]) begin
        found  = 1'b1;
        victim = WW'(w);
      end
    end
    for (int k = 0; k < WAYS; k++) begin
      if (!found && allowed[(int'(start) + k) % WAYS]) begin
        found  = 1'b1;
        victim = WW'((int'(start) + k) % WAYS);
      end
    end
    none = (allowed == '0);
  end

endmodule
