// ctrl_bus: MMIO front end of the security primitives' configuration registers.
//
// The monitor configures every added register over MMIO. This block is the
// slave that receives those accesses and turns them into the simple register
// ports of the primitives. Address bits 11:9 select the primitive and bits 8:3
// the register (8-byte stride, low 32 bits of the data word used):
//   0  memory arbiter        1  peripheral arbiter
//   2  DMA port filter       3  shared-cache partitioning
//   4  violation status: reg 0 = sticky bits {l2, dma, periph, mem} (write 1 to
//      clear), reg 1 = address of the latest violation
// Violation pulses from the access-control points set the sticky bits; irq is
// high while any bit is set and goes to the core running the monitor.
// Timing: a write takes effect at the edge that accepts it; every access is
// answered on the following cycle (read data sampled at acceptance).
//
// Follows the design: configuration over a control bus by MMIO, an interrupt on
// access violation. Own choices: the register map and the status register.
module ctrl_bus
  import cure_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  tl_req_t              req,
  output logic                 rsp_valid,
  input  logic                 rsp_ready,
  output tl_rsp_t              rsp,
  // configuration ports, shared index and data, one write strobe per primitive
  output logic [3:0]           cfg_we,
  output logic [CFG_IDX_W-1:0] cfg_idx,
  output logic [31:0]          cfg_wdata,
  input  logic [31:0]          cfg_rdata [4],
  // violation pulses {l2, dma, periph, mem} and their addresses
  input  logic [3:0]           viol,
  input  addr_t                viol_addr [4],
  output logic                 irq
);
  logic [3:0] status_q;
  addr_t      last_q;
  logic       busy_q;
  tl_rsp_t    rsp_q;

  wire [2:0] sel    = req.addr[11:9];
  wire       accept = req_valid && req_ready;
  wire       wr     = accept && is_write(req.op);

  assign req_ready = !busy_q;
  assign cfg_idx   = req.addr[8:3];
  assign cfg_wdata = req.data[31:0];
  always_comb begin
    cfg_we = '0;
    if (wr && sel < 3'd4) cfg_we[sel[1:0]] = 1'b1;
  end

  logic [31:0] rdata;
  always_comb begin
    if (sel < 3'd4)          rdata = cfg_rdata[sel[1:0]];
    else if (sel == 3'd4)    rdata = (cfg_idx == '0) ? 32'(status_q) :
                                     (cfg_idx == 6'd1) ? last_q : '0;
    else                     rdata = '0;
  end

  wire [3:0] clr = (wr && sel == 3'd4 && cfg_idx == '0) ? req.data[3:0] : 4'h0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      status_q <= '0;
      last_q   <= '0;
      busy_q   <= 1'b0;
      rsp_q    <= '0;
    end else begin
      status_q <= (status_q & ~clr) | viol;
      for (int i = 0; i < 4; i++) if (viol[i]) last_q <= viol_addr[i];
      if (accept) begin
        busy_q      <= 1'b1;
        rsp_q.data  <= data_t'(rdata);
        rsp_q.source <= req.source;
      end else if (rsp_valid && rsp_ready) begin
        busy_q <= 1'b0;
      end
    end
  end

  assign rsp_valid = busy_q;
  assign rsp       = rsp_q;
  assign irq       = |status_q;

endmodule
