// periph_bus: the peripheral (MMIO) bus behind the peripheral arbiter.
//
// Address bits 15:12 select the target: 0 is the control bus of the security
// primitives, 1..N_PERIPH are the peripherals (peripheral k at 4 KiB page k+1),
// anything else is unmapped. An unmapped access, which includes the address
// that refused transactions are redirected to, is answered by the bus itself one
// cycle later with zero data, and its write data is dropped.
// One transaction is outstanding; the bus remembers the target to route the
// response back.
//
// Follows the design: a peripheral bus with a fixed set of hardwired
// peripheral ports and a control bus reachable over MMIO. Own choices: the
// 4 KiB page per target and the zero responder.
module periph_bus
  import cure_pkg::*;
#(
  parameter int N_PERIPH = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                req_valid,
  output logic                req_ready,
  input  tl_req_t             req,
  output logic                rsp_valid,
  input  logic                rsp_ready,
  output tl_rsp_t             rsp,
  // peripherals
  output logic [N_PERIPH-1:0] p_req_valid,
  input  logic [N_PERIPH-1:0] p_req_ready,
  output tl_req_t             p_req,
  input  logic [N_PERIPH-1:0] p_rsp_valid,
  output logic [N_PERIPH-1:0] p_rsp_ready,
  input  tl_rsp_t             p_rsp [N_PERIPH],
  // control bus
  output logic                c_req_valid,
  input  logic                c_req_ready,
  output tl_req_t             c_req,
  input  logic                c_rsp_valid,
  output logic                c_rsp_ready,
  input  tl_rsp_t             c_rsp
);
  localparam int TW = $clog2(N_PERIPH + 2);
  localparam int T_CTRL  = 0;
  localparam int T_UNMAP = N_PERIPH + 1;

  logic [TW-1:0] tgt, tgt_q;
  logic          busy_q;
  tl_rsp_t       zrsp_q;
  logic          zvalid_q;

  always_comb begin
    int pg;
    pg = int'(req.addr[15:12]);
    if (pg == 0)             tgt = TW'(T_CTRL);
    else if (pg <= N_PERIPH) tgt = TW'(pg);
    else                     tgt = TW'(T_UNMAP);
  end

  assign p_req = req;
  assign c_req = req;

  always_comb begin
    p_req_valid = '0;
    c_req_valid = 1'b0;
    req_ready   = 1'b0;
    if (!busy_q && req_valid) begin
      if (int'(tgt) == T_CTRL) begin
        c_req_valid = 1'b1;
        req_ready   = c_req_ready;
      end else if (int'(tgt) == T_UNMAP) begin
        req_ready   = 1'b1;
      end else begin
        p_req_valid[int'(tgt)-1] = 1'b1;
        req_ready                = p_req_ready[int'(tgt)-1];
      end
    end
  end

  always_comb begin
    rsp_valid   = 1'b0;
    rsp         = zrsp_q;
    p_rsp_ready = '0;
    c_rsp_ready = 1'b0;
    if (busy_q) begin
      if (int'(tgt_q) == T_CTRL) begin
        rsp_valid   = c_rsp_valid;
        rsp         = c_rsp;
        c_rsp_ready = rsp_ready;
      end else if (int'(tgt_q) == T_UNMAP) begin
        rsp_valid   = zvalid_q;
      end else begin
        rsp_valid                      = p_rsp_valid[int'(tgt_q)-1];
        rsp                            = p_rsp[int'(tgt_q)-1];
        p_rsp_ready[int'(tgt_q)-1]     = rsp_ready;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q   <= 1'b0;
      tgt_q    <= '0;
      zvalid_q <= 1'b0;
      zrsp_q   <= '0;
    end else if (!busy_q) begin
      if (req_valid && req_ready) begin
        busy_q        <= 1'b1;
        tgt_q         <= tgt;
        zvalid_q      <= (int'(tgt) == T_UNMAP);
        zrsp_q.data   <= '0;
        zrsp_q.source <= req.source;
      end
    end else if (rsp_valid && rsp_ready) begin
      busy_q   <= 1'b0;
      zvalid_q <= 1'b0;
    end
  end

endmodule
