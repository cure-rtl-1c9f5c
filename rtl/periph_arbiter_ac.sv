// periph_arbiter_ac: peripheral-bus arbiter with enclave-ID access control (SP2).
//
// The arbiter in front of the peripheral bus grants one core at a time (round
// robin, see bus_arbiter) and checks the granted MMIO transaction in the same
// cycle. Each peripheral p has two registers: an Addr/Mask pair covering its
// MMIO region, and a 32-bit permission bitmap with a read and a write bit for
// each of the 16 eids (bit 2*eid = read, bit 2*eid+1 = write). A transaction
// inside region p passes only if the bit for its eid and direction is set; if
// several regions match, the lowest-numbered one decides. An address outside
// every region is not checked (the bus answers such addresses with zeros).
// A peripheral may so be given to one enclave alone, or shared among several
// enclaves and the OS.
//
// A refused transaction is forwarded with its address replaced by SINK_ADDR,
// an address no peripheral decodes, and zero data, so it reads zeros and its
// write goes nowhere; viol pulses for one cycle.
//
// Configuration: cfg index 3*p is base p, 3*p+1 mask p, 3*p+2 the bitmap.
// Region 0 is, in this SoC, the control bus of the security primitives, which
// the monitor keeps for itself. All registers reset to zero (no region).
//
// Follows the design: Addr/Mask region plus 32-bit read/write bitmap per
// peripheral, check in parallel with arbitration. Own choices: the bit order of
// the bitmap, the treatment of unmatched addresses, the register numbering.
//
// Reset note: rst_n is also read by the assertions' disable iff, which lint
// reports as a synchronous use of an asynchronous reset; the flops use it
// asynchronously only.
module periph_arbiter_ac
  import cure_pkg::*;
#(
  parameter int     N_PORTS   = 2,
  parameter int     N_REGIONS = 4,
  parameter addr_t  SINK_ADDR = 32'h1000_F000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_PORTS-1:0]   in_req_valid,
  output logic [N_PORTS-1:0]   in_req_ready,
  input  tl_req_t              in_req [N_PORTS],
  output logic [N_PORTS-1:0]   in_rsp_valid,
  input  logic [N_PORTS-1:0]   in_rsp_ready,
  output tl_rsp_t              in_rsp [N_PORTS],
  output logic                 out_req_valid,
  input  logic                 out_req_ready,
  output tl_req_t              out_req,
  input  logic                 out_rsp_valid,
  output logic                 out_rsp_ready,
  input  tl_rsp_t              out_rsp,
  output logic                 viol,
  output addr_t                viol_addr,
  input  logic                 cfg_we,
  input  logic [CFG_IDX_W-1:0] cfg_idx,
  input  logic [31:0]          cfg_wdata,
  output logic [31:0]          cfg_rdata
);
  localparam int IW = $clog2(N_PORTS > 1 ? N_PORTS : 2);

  addr_t       base_q [N_REGIONS];
  addr_t       mask_q [N_REGIONS];
  logic [31:0] perm_q [N_REGIONS];

  logic          gnt_valid;
  tl_req_t       gnt_req;
  logic [IW-1:0] gnt_idx;

  bus_arbiter #(.N(N_PORTS)) u_arb (
    .clk, .rst_n,
    .in_req_valid, .in_req_ready, .in_req,
    .in_rsp_valid, .in_rsp_ready, .in_rsp,
    .gnt_valid, .gnt_req, .gnt_idx,
    .out_req_ready, .out_rsp_valid, .out_rsp_ready, .out_rsp
  );

  logic allowed;
  always_comb begin
    logic matched;
    logic [4:0] bitpos;
    matched = 1'b0;
    allowed = 1'b1;
    bitpos  = {gnt_req.eid, is_write(gnt_req.op)};
    for (int p = 0; p < N_REGIONS; p++) begin
      if (!matched && region_hit(gnt_req.addr, base_q[p], mask_q[p])) begin
        matched = 1'b1;
        allowed = perm_q[p][bitpos];
      end
    end
  end

  always_comb begin
    out_req = gnt_req;
    if (!allowed) begin
      out_req.addr = SINK_ADDR;
      out_req.data = '0;
    end
  end
  assign out_req_valid = gnt_valid;
  assign viol          = gnt_valid && out_req_ready && !allowed;
  assign viol_addr     = gnt_req.addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < N_REGIONS; p++) begin
        base_q[p] <= '0;
        mask_q[p] <= '0;
        perm_q[p] <= '0;
      end
    end else if (cfg_we) begin
      for (int p = 0; p < N_REGIONS; p++) begin
        if (int'(cfg_idx) == 3*p)   base_q[p] <= cfg_wdata;
        if (int'(cfg_idx) == 3*p+1) mask_q[p] <= cfg_wdata;
        if (int'(cfg_idx) == 3*p+2) perm_q[p] <= cfg_wdata;
      end
    end
  end

  always_comb begin
    cfg_rdata = '0;
    for (int p = 0; p < N_REGIONS; p++) begin
      if (int'(cfg_idx) == 3*p)   cfg_rdata = base_q[p];
      if (int'(cfg_idx) == 3*p+1) cfg_rdata = mask_q[p];
      if (int'(cfg_idx) == 3*p+2) cfg_rdata = perm_q[p];
    end
  end

endmodule
