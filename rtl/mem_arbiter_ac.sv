// mem_arbiter_ac: memory arbiter with enclave-ID access control (SP2).
//
// The arbiter in front of main memory grants one master at a time (round
// robin, see bus_arbiter) and, in the same cycle, checks the granted
// transaction's eid and address against 15 region registers, one per context
// that owns memory: index i (1..13) is the region of enclave i, index 14 the
// firmware, index 15 the security monitor. A register is a 32-bit base (Addr)
// and a 32-bit mask (Mask); an address is inside when its masked bits equal
// the base's masked bits, and a zero mask marks the register unused.
//
// Rules: the monitor (0xF) is never checked. An enclave may reach only its own
// region. The OS (0) may reach every address outside all regions. The firmware
// (0xE) may reach its own region and every address outside all regions.
// A refused transaction is not dropped: it is forwarded with its address
// replaced by SINK_ADDR and its data set to zero, so it reads zeros
// from, or writes zeros to, an unused zero-filled location; viol pulses for one
// cycle with the offending address for the interrupt logic.
//
// Ports whose bit in CHECK_PORTS is clear are not checked by eid: a DMA port
// has its own region filter (dma_port_ac) in front of the arbiter.
//
// Configuration: cfg index 2*i is base i, 2*i+1 is mask i (i = 1..15), written
// by the monitor over the control bus; reads return the registers.
// Timing: the check is combinational on the granted request; no cycle added.
//
// Follows the design: 15 registers, Addr/Mask form, the rules per context,
// redirection to a zero region, check in parallel to arbitration. Own
// choices: the zero-mask convention, the register numbering, the sink address.
//
// Reset note: rst_n is also read by the assertions' disable iff, which lint
// reports as a synchronous use of an asynchronous reset; the flops use it
// asynchronously only.
module mem_arbiter_ac
  import cure_pkg::*;
#(
  parameter int           N_PORTS     = 3,
  parameter logic [31:0]  CHECK_PORTS = 32'h3,
  parameter int           N_REGIONS   = 15,
  parameter addr_t        SINK_ADDR   = 32'h8000_1FC0
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
  // access violation
  output logic                 viol,
  output addr_t                viol_addr,
  // configuration
  input  logic                 cfg_we,
  input  logic [CFG_IDX_W-1:0] cfg_idx,
  input  logic [31:0]          cfg_wdata,
  output logic [31:0]          cfg_rdata
);
  localparam int IW = $clog2(N_PORTS > 1 ? N_PORTS : 2);

  addr_t base_q [N_REGIONS+1];
  addr_t mask_q [N_REGIONS+1];

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

  // region hits of the granted address
  logic [N_REGIONS:0] hit;
  always_comb begin
    hit = '0;
    for (int i = 1; i <= N_REGIONS; i++)
      hit[i] = region_hit(gnt_req.addr, base_q[i], mask_q[i]);
  end

  logic allowed;
  always_comb begin
    eid_t e;
    e = gnt_req.eid;
    if (!CHECK_PORTS[32'(gnt_idx)])     allowed = 1'b1;
    else if (e == EID_SM)               allowed = 1'b1;
    else if (e == EID_OS)               allowed = (hit == '0);
    else if (e == EID_FW)               allowed = hit[EID_FW] || (hit == '0);
    else if (int'(e) <= N_REGIONS)      allowed = hit[e];
    else                                allowed = 1'b0;
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
      for (int i = 0; i <= N_REGIONS; i++) begin
        base_q[i] <= '0;
        mask_q[i] <= '0;
      end
    end else if (cfg_we) begin
      for (int i = 1; i <= N_REGIONS; i++) begin
        if (int'(cfg_idx) == 2*i)   base_q[i] <= cfg_wdata;
        if (int'(cfg_idx) == 2*i+1) mask_q[i] <= cfg_wdata;
      end
    end
  end

  always_comb begin
    cfg_rdata = '0;
    for (int i = 1; i <= N_REGIONS; i++) begin
      if (int'(cfg_idx) == 2*i)   cfg_rdata = base_q[i];
      if (int'(cfg_idx) == 2*i+1) cfg_rdata = mask_q[i];
    end
  end

endmodule
