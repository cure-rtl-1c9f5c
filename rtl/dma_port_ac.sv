// dma_port_ac: access-control filter at the port of a DMA master (SP2).
//
// A DMA device is given to one enclave at a time. The filter holds one region
// register (32-bit Addr and Mask, zero mask = no region, i.e. the device may
// reach nothing) and the owner eid of the device. Every request of the device
// whose address lies outside the region is redirected to SINK_ADDR with zero
// data, and viol pulses for one cycle. Passing requests get the owner eid
// attached, so that the partitioned shared cache files the lines under the
// enclave the device serves; the memory arbiter does not check this port again.
// The device reaches main memory only; MMIO addresses are outside any memory
// region the monitor would grant.
//
// Configuration: cfg index CFG_BASE+0 = base, +1 = mask, +2 = owner eid
// (bits 3:0); other indices read zero, so several ports can share one bus.
// Timing: combinational, no cycle added. One transaction in flight, handshakes
// are passed straight through.
//
// Follows the design: one Addr/Mask register at each DMA port, checked without
// giving the DMA device an eid of its own. Own choice: the owner-eid field that
// only serves the cache's line ownership.
module dma_port_ac
  import cure_pkg::*;
#(
  parameter addr_t SINK_ADDR = 32'h8000_1FC0,
  parameter int    CFG_BASE  = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 dma_req_valid,
  output logic                 dma_req_ready,
  input  tl_req_t              dma_req,
  output logic                 dma_rsp_valid,
  input  logic                 dma_rsp_ready,
  output tl_rsp_t              dma_rsp,
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
  addr_t base_q, mask_q;
  eid_t  owner_q;

  wire allowed = region_hit(dma_req.addr, base_q, mask_q);

  always_comb begin
    out_req     = dma_req;
    out_req.eid = owner_q;
    if (!allowed) begin
      out_req.addr = SINK_ADDR;
      out_req.data = '0;
    end
  end
  assign out_req_valid = dma_req_valid;
  assign dma_req_ready = out_req_ready;
  assign dma_rsp_valid = out_rsp_valid;
  assign dma_rsp       = out_rsp;
  assign out_rsp_ready = dma_rsp_ready;
  assign viol          = dma_req_valid && out_req_ready && !allowed;
  assign viol_addr     = dma_req.addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q  <= '0;
      mask_q  <= '0;
      owner_q <= EID_OS;
    end else if (cfg_we) begin
      if (int'(cfg_idx) == CFG_BASE)     base_q  <= cfg_wdata;
      if (int'(cfg_idx) == CFG_BASE + 1) mask_q  <= cfg_wdata;
      if (int'(cfg_idx) == CFG_BASE + 2) owner_q <= eid_t'(cfg_wdata[EID_W-1:0]);
    end
  end

  always_comb begin
    if (int'(cfg_idx) == CFG_BASE)          cfg_rdata = base_q;
    else if (int'(cfg_idx) == CFG_BASE + 1) cfg_rdata = mask_q;
    else if (int'(cfg_idx) == CFG_BASE + 2) cfg_rdata = 32'(owner_q);
    else                                    cfg_rdata = '0;
  end

endmodule
