// bus_arbiter: round-robin arbiter for N bus masters in front of one slave.
//
// Among the masters with a valid request, the first one at or after the
// round-robin pointer is granted; the pointer then moves past the granted
// master. The link is held by the granted master from the accepted request
// until its response has been accepted, so one transaction is outstanding.
// The granted request is presented combinationally (gnt_req, gnt_idx) so that
// an access-control check can run in the same cycle as arbitration and no cycle
// is added. The checking module drives out_req itself.
//
// Own choices: round-robin order and the single outstanding transaction; the
// design only states that the bus arbiters already exist and that the access
// control runs in parallel to them.
//
// Reset note: rst_n is also read by the assertions' disable iff, which lint
// reports as a synchronous use of an asynchronous reset; the flops use it
// asynchronously only.
module bus_arbiter
  import cure_pkg::*;
#(
  parameter int N = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N-1:0]    in_req_valid,
  output logic [N-1:0]    in_req_ready,
  input  tl_req_t         in_req [N],
  output logic [N-1:0]    in_rsp_valid,
  input  logic [N-1:0]    in_rsp_ready,
  output tl_rsp_t         in_rsp [N],
  // granted request towards the slave
  output logic            gnt_valid,
  output tl_req_t         gnt_req,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx,
  input  logic            out_req_ready,
  input  logic            out_rsp_valid,
  output logic            out_rsp_ready,
  input  tl_rsp_t         out_rsp
);
  localparam int IW = $clog2(N > 1 ? N : 2);

  logic [IW-1:0] ptr_q, owner_q;
  logic          busy_q;
  logic [IW-1:0] pick;
  logic          any;

  always_comb begin
    pick = ptr_q;
    any  = 1'b0;
    for (int k = N-1; k >= 0; k--) begin
      if (in_req_valid[(int'(ptr_q) + k) % N]) begin
        pick = IW'((int'(ptr_q) + k) % N);
        any  = 1'b1;
      end
    end
  end

  assign gnt_valid = !busy_q && any;
  assign gnt_idx   = pick;
  assign gnt_req   = in_req[pick];

  always_comb begin
    in_req_ready = '0;
    in_rsp_valid = '0;
    for (int i = 0; i < N; i++) in_rsp[i] = out_rsp;
    if (gnt_valid) in_req_ready[pick] = out_req_ready;
    if (busy_q)    in_rsp_valid[owner_q] = out_rsp_valid;
  end
  assign out_rsp_ready = busy_q && in_rsp_ready[owner_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q   <= '0;
      owner_q <= '0;
      busy_q  <= 1'b0;
    end else if (!busy_q) begin
      if (gnt_valid && out_req_ready) begin
        busy_q  <= 1'b1;
        owner_q <= pick;
        ptr_q   <= (int'(pick) == N-1) ? '0 : pick + 1'b1;
      end
    end else if (out_rsp_valid && out_rsp_ready) begin
      busy_q <= 1'b0;
    end
  end

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(in_req_ready));
  a_no_rsp_idle: assert property (@(posedge clk) disable iff (!rst_n)
    !busy_q |-> in_rsp_valid == '0);

endmodule
