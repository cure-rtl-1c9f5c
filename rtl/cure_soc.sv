// cure_soc: the enclave-ID security primitives of a two-core SoC, wired together.
//
// Per core an eid_unit holds the enclave-ID register and stamps every memory
// request; a sysbus_decoder sends it to the memory arbiter or, for MMIO
// (top address nibble 0x1), to the peripheral arbiter. The DMA master enters
// through its dma_port_ac filter (one per device, N_DMA, register block
// 3*d..3*d+2 of the DMA page) and uses a memory-arbiter port after the cores',
// which the arbiter does not check by eid. The memory arbiter (mem_arbiter_ac) feeds
// the partitioned shared cache (l2_cache), whose line port is main memory.
// The peripheral arbiter (periph_arbiter_ac) feeds the peripheral bus
// (periph_bus), which serves the external peripherals and the control bus
// (ctrl_bus) that holds all configuration registers and the violation
// interrupt. Cores, L1 caches, the DMA device, main memory and the peripherals
// are outside and reached through this module's ports.
//
// Memory map (own choice): 0x1000_0000..0x1FFF_FFFF MMIO, control bus at
// 0x1000_0000 (+0x000 memory arbiter, +0x200 peripheral arbiter, +0x400 DMA
// port, +0x600 cache partitioning, +0x800 status), peripheral k at
// 0x1000_0000 + (k+1)*0x1000; everything else is main memory. Refused memory
// accesses go to MEM_SINK, refused MMIO accesses to an unmapped page.
//
// Follows the design: two cores, DMA devices (one by default, as in the
// prototype), several peripherals, a filter register at every DMA port, access
// control at the memory arbiter, peripheral arbiter and DMA port, an eid on
// channels A and C, the shared cache behind the system bus.
//
// Reset note: rst_n is also read by the assertions' disable iff, which lint
// reports as a synchronous use of an asynchronous reset; the flops use it
// asynchronously only.
module cure_soc
  import cure_pkg::*;
#(
  parameter int    N_CORES  = 2,
  parameter int    N_DMA    = 1,
  parameter int    N_PERIPH = 3,
  parameter int    L2_SIZE_KB = 2048,
  parameter int    L2_WAYS    = 16,
  parameter int    L2_LINE_B  = 64,
  parameter addr_t MEM_SINK   = 32'h8000_1FC0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // cores: CSR port and trap handshake
  input  logic [N_CORES-1:0]    csr_we,
  input  logic [11:0]           csr_addr  [N_CORES],
  input  logic [31:0]           csr_wdata [N_CORES],
  output logic [31:0]           csr_rdata [N_CORES],
  output logic [N_CORES-1:0]    csr_illegal,
  input  logic [N_CORES-1:0]    trap_m,
  output logic [N_CORES-1:0]    trap_busy,
  output logic [N_CORES-1:0]    l1_flush_req,
  input  logic [N_CORES-1:0]    l1_flush_done,
  output eid_t                  core_eid  [N_CORES],
  output logic [31:0]           core_mtvec [N_CORES],
  // cores: memory port (the eid field of core_req is ignored)
  input  logic [N_CORES-1:0]    core_req_valid,
  output logic [N_CORES-1:0]    core_req_ready,
  input  tl_req_t               core_req  [N_CORES],
  output logic [N_CORES-1:0]    core_rsp_valid,
  input  logic [N_CORES-1:0]    core_rsp_ready,
  output tl_rsp_t               core_rsp  [N_CORES],
  // DMA devices
  input  logic [N_DMA-1:0]      dma_req_valid,
  output logic [N_DMA-1:0]      dma_req_ready,
  input  tl_req_t               dma_req   [N_DMA],
  output logic [N_DMA-1:0]      dma_rsp_valid,
  input  logic [N_DMA-1:0]      dma_rsp_ready,
  output tl_rsp_t               dma_rsp   [N_DMA],
  // peripherals
  output logic [N_PERIPH-1:0]   p_req_valid,
  input  logic [N_PERIPH-1:0]   p_req_ready,
  output tl_req_t               p_req,
  input  logic [N_PERIPH-1:0]   p_rsp_valid,
  output logic [N_PERIPH-1:0]   p_rsp_ready,
  input  tl_rsp_t               p_rsp [N_PERIPH],
  // main memory
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic                  mem_req_write,
  output addr_t                 mem_req_addr,
  output logic [L2_LINE_B*8-1:0] mem_req_wdata,
  input  logic                  mem_rsp_valid,
  input  logic [L2_LINE_B*8-1:0] mem_rsp_rdata,
  // interrupt and cache events
  output logic                  ac_irq,
  output logic [3:0]            l2_events
);
  localparam int NM = N_CORES + N_DMA;

  // every master needs its own source ID, every DMA port three cfg registers
  if (NM > (1 << SRC_W) || 3 * N_DMA > (1 << CFG_IDX_W)) begin : g_size_error
    $error("cure_soc: too many bus masters for the source and register fields");
  end

  // memory arbiter ports
  logic [NM-1:0] ma_req_valid, ma_req_ready, ma_rsp_valid, ma_rsp_ready;
  tl_req_t       ma_req [NM];
  tl_rsp_t       ma_rsp [NM];
  // peripheral arbiter ports
  logic [N_CORES-1:0] pa_req_valid, pa_req_ready, pa_rsp_valid, pa_rsp_ready;
  tl_req_t            pa_req [N_CORES];
  tl_rsp_t            pa_rsp [N_CORES];

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    tl_req_t tagged_r;
    tl_req_t req_src;
    always_comb begin
      req_src        = core_req[c];
      req_src.source = SRC_W'(c);
    end
    eid_unit u_eid (
      .clk, .rst_n,
      .csr_we(csr_we[c]), .csr_addr(csr_addr[c]), .csr_wdata(csr_wdata[c]),
      .csr_rdata(csr_rdata[c]), .csr_illegal(csr_illegal[c]),
      .trap_m(trap_m[c]), .trap_busy(trap_busy[c]),
      .l1_flush_req(l1_flush_req[c]), .l1_flush_done(l1_flush_done[c]),
      .eid(core_eid[c]), .mtvec(core_mtvec[c]),
      .core_req(req_src), .tagged_req(tagged_r)
    );
    sysbus_decoder u_dec (
      .clk, .rst_n,
      .m_req_valid(core_req_valid[c]), .m_req_ready(core_req_ready[c]), .m_req(tagged_r),
      .m_rsp_valid(core_rsp_valid[c]), .m_rsp_ready(core_rsp_ready[c]), .m_rsp(core_rsp[c]),
      .mem_req_valid(ma_req_valid[c]), .mem_req_ready(ma_req_ready[c]), .mem_req(ma_req[c]),
      .mem_rsp_valid(ma_rsp_valid[c]), .mem_rsp_ready(ma_rsp_ready[c]), .mem_rsp(ma_rsp[c]),
      .per_req_valid(pa_req_valid[c]), .per_req_ready(pa_req_ready[c]), .per_req(pa_req[c]),
      .per_rsp_valid(pa_rsp_valid[c]), .per_rsp_ready(pa_rsp_ready[c]), .per_rsp(pa_rsp[c])
    );
  end

  // configuration fan-out
  logic [3:0]           cfg_we;
  logic [CFG_IDX_W-1:0] cfg_idx;
  logic [31:0]          cfg_wdata;
  logic [31:0]          cfg_rdata [4];
  logic [3:0]           viol;
  addr_t                viol_addr [4];

  // DMA ports: one filter per device, on the memory-arbiter ports after the cores
  logic [N_DMA-1:0] dma_viol;
  addr_t            dma_viol_addr [N_DMA];
  logic [31:0]      dma_cfg_rdata [N_DMA];
  for (genvar d = 0; d < N_DMA; d++) begin : g_dma
    tl_req_t req_src;
    always_comb begin
      req_src        = dma_req[d];
      req_src.source = SRC_W'(N_CORES + d);
    end
    dma_port_ac #(.SINK_ADDR(MEM_SINK), .CFG_BASE(3 * d)) u_dma (
      .clk, .rst_n,
      .dma_req_valid(dma_req_valid[d]), .dma_req_ready(dma_req_ready[d]), .dma_req(req_src),
      .dma_rsp_valid(dma_rsp_valid[d]), .dma_rsp_ready(dma_rsp_ready[d]), .dma_rsp(dma_rsp[d]),
      .out_req_valid(ma_req_valid[N_CORES + d]), .out_req_ready(ma_req_ready[N_CORES + d]),
      .out_req(ma_req[N_CORES + d]),
      .out_rsp_valid(ma_rsp_valid[N_CORES + d]), .out_rsp_ready(ma_rsp_ready[N_CORES + d]),
      .out_rsp(ma_rsp[N_CORES + d]),
      .viol(dma_viol[d]), .viol_addr(dma_viol_addr[d]),
      .cfg_we(cfg_we[2]), .cfg_idx, .cfg_wdata, .cfg_rdata(dma_cfg_rdata[d])
    );
  end
  addr_t       dma_va;
  logic [31:0] dma_rd;
  always_comb begin
    dma_va = '0;
    dma_rd = '0;
    for (int d = N_DMA - 1; d >= 0; d--) begin
      if (dma_viol[d]) dma_va = dma_viol_addr[d];
      dma_rd = dma_rd | dma_cfg_rdata[d];
    end
  end
  assign viol[2]      = |dma_viol;
  assign viol_addr[2] = dma_va;
  assign cfg_rdata[2] = dma_rd;

  // memory arbiter -> shared cache
  logic    l2_req_valid, l2_req_ready, l2_rsp_valid, l2_rsp_ready;
  tl_req_t l2_req;
  tl_rsp_t l2_rsp;
  mem_arbiter_ac #(
    .N_PORTS(NM), .CHECK_PORTS(32'((1 << N_CORES) - 1)), .SINK_ADDR(MEM_SINK)
  ) u_mem_arb (
    .clk, .rst_n,
    .in_req_valid(ma_req_valid), .in_req_ready(ma_req_ready), .in_req(ma_req),
    .in_rsp_valid(ma_rsp_valid), .in_rsp_ready(ma_rsp_ready), .in_rsp(ma_rsp),
    .out_req_valid(l2_req_valid), .out_req_ready(l2_req_ready), .out_req(l2_req),
    .out_rsp_valid(l2_rsp_valid), .out_rsp_ready(l2_rsp_ready), .out_rsp(l2_rsp),
    .viol(viol[0]), .viol_addr(viol_addr[0]),
    .cfg_we(cfg_we[0]), .cfg_idx, .cfg_wdata, .cfg_rdata(cfg_rdata[0])
  );

  l2_cache #(.SIZE_KB(L2_SIZE_KB), .WAYS(L2_WAYS), .LINE_B(L2_LINE_B)) u_l2 (
    .clk, .rst_n,
    .req_valid(l2_req_valid), .req_ready(l2_req_ready), .req(l2_req),
    .rsp_valid(l2_rsp_valid), .rsp_ready(l2_rsp_ready), .rsp(l2_rsp),
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata,
    .cfg_we(cfg_we[3]), .cfg_idx, .cfg_wdata, .cfg_rdata(cfg_rdata[3]),
    .ev_hit(l2_events[0]), .ev_miss(l2_events[1]), .ev_wb(l2_events[2]),
    .ev_conflict(l2_events[3])
  );
  assign viol[3]      = 1'b0;   // the cache refuses nothing: a failed check is a miss
  assign viol_addr[3] = '0;

  // peripheral arbiter -> peripheral bus
  logic    pb_req_valid, pb_req_ready, pb_rsp_valid, pb_rsp_ready;
  tl_req_t pb_req;
  tl_rsp_t pb_rsp;
  periph_arbiter_ac #(.N_PORTS(N_CORES), .N_REGIONS(N_PERIPH + 1)) u_per_arb (
    .clk, .rst_n,
    .in_req_valid(pa_req_valid), .in_req_ready(pa_req_ready), .in_req(pa_req),
    .in_rsp_valid(pa_rsp_valid), .in_rsp_ready(pa_rsp_ready), .in_rsp(pa_rsp),
    .out_req_valid(pb_req_valid), .out_req_ready(pb_req_ready), .out_req(pb_req),
    .out_rsp_valid(pb_rsp_valid), .out_rsp_ready(pb_rsp_ready), .out_rsp(pb_rsp),
    .viol(viol[1]), .viol_addr(viol_addr[1]),
    .cfg_we(cfg_we[1]), .cfg_idx, .cfg_wdata, .cfg_rdata(cfg_rdata[1])
  );

  logic    c_req_valid, c_req_ready, c_rsp_valid, c_rsp_ready;
  tl_req_t c_req;
  tl_rsp_t c_rsp;
  periph_bus #(.N_PERIPH(N_PERIPH)) u_pbus (
    .clk, .rst_n,
    .req_valid(pb_req_valid), .req_ready(pb_req_ready), .req(pb_req),
    .rsp_valid(pb_rsp_valid), .rsp_ready(pb_rsp_ready), .rsp(pb_rsp),
    .p_req_valid, .p_req_ready, .p_req, .p_rsp_valid, .p_rsp_ready, .p_rsp,
    .c_req_valid, .c_req_ready, .c_req, .c_rsp_valid, .c_rsp_ready, .c_rsp
  );

  ctrl_bus u_ctrl (
    .clk, .rst_n,
    .req_valid(c_req_valid), .req_ready(c_req_ready), .req(c_req),
    .rsp_valid(c_rsp_valid), .rsp_ready(c_rsp_ready), .rsp(c_rsp),
    .cfg_we, .cfg_idx, .cfg_wdata, .cfg_rdata,
    .viol, .viol_addr, .irq(ac_irq)
  );

endmodule
