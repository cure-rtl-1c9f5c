// tb_cure_soc_dma: the SoC with two DMA devices (N_DMA = 2), each behind its
// own filter register, as the design asks for every port that connects a
// DMA device. Device 0 is bound to enclave 1 with a buffer inside the
// enclave; device 1 is bound to the OS with a buffer in OS memory. Checks:
// the registers of both filters sit at their own indices of the DMA page and
// read back; each device reaches its own buffer, and its data is seen by the
// owner's core; each device's access to the other's buffer (and to monitor
// memory) reads zero and writes nothing; both devices run at the same time
// as the cores; the DMA violation bit and the interrupt are raised.
// Bus models and task timing are the same as in tb_cure_soc.
module tb_cure_soc_dma;
  import cure_pkg::*;
  localparam int NC = 2, NP = 3, LB = 64;
  typedef logic [LB*8-1:0] line_t;
  localparam addr_t CTRL = 32'h1000_0000;
  localparam addr_t SINK = 32'h8000_1FC0;
  localparam addr_t ENC  = 32'h8010_0000;   // enclave 1, 1 MiB
  localparam addr_t DMAR = 32'h8018_0000;   // DMA buffer inside it, 4 KiB
  localparam addr_t OSM  = 32'h8100_0000;   // OS memory
  localparam addr_t SMM  = 32'h8000_1000;   // monitor memory

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // DUT signals
  logic [NC-1:0] csr_we = '0, csr_illegal, trap_m = '0, trap_busy, l1_flush_req, l1_flush_done = '0;
  logic [11:0]   csr_addr [NC];
  logic [31:0]   csr_wdata [NC], csr_rdata [NC], core_mtvec [NC];
  eid_t          core_eid [NC];
  logic [NC-1:0] core_req_valid = '0, core_req_ready, core_rsp_valid, core_rsp_ready = '1;
  tl_req_t       core_req [NC];
  tl_rsp_t       core_rsp [NC];
  logic [1:0]    dma_req_valid = '0, dma_req_ready, dma_rsp_valid, dma_rsp_ready = '1;
  tl_req_t       dma_req [2];
  tl_rsp_t       dma_rsp [2];
  logic [NP-1:0] p_req_valid, p_req_ready = '1, p_rsp_valid = '0, p_rsp_ready;
  tl_req_t       p_req;
  tl_rsp_t       p_rsp [NP];
  logic          mem_req_valid, mem_req_ready = 1, mem_req_write, mem_rsp_valid = 0;
  addr_t         mem_req_addr;
  line_t         mem_req_wdata, mem_rsp_rdata;
  logic          ac_irq;
  logic [3:0]    l2_events;

  cure_soc #(.N_DMA(2)) dut (.*);

  // ---------------- main memory ----------------
  line_t mem [addr_t];
  function automatic data_t init_word(addr_t wa);
    if (wa[31:6] == SINK[31:6]) return '0;     // the monitor keeps the sink zeroed
    return {wa, ~wa};
  endfunction
  function automatic line_t mem_line(addr_t la);
    line_t l;
    if (mem.exists(la)) return mem[la];
    for (int w = 0; w < LB/8; w++) l[w*64 +: 64] = init_word(la + addr_t'(w*8));
    return l;
  endfunction
  // like a register stage: a request accepted at one rising edge is answered
  // during the following cycle (valid after the next rising edge)
  addr_t m_a; bit m_wr, m_pend = 0; line_t m_d;
  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (m_pend) begin
      if (m_wr) mem[m_a] = m_d; else mem_rsp_rdata <= mem_line(m_a);
      mem_rsp_valid <= 1'b1;
      m_pend = 0;
    end
    if (mem_req_valid && mem_req_ready) begin
      m_a = mem_req_addr; m_wr = mem_req_write; m_d = mem_req_wdata; m_pend = 1;
    end
  end

  // ---------------- peripherals: one 64-bit register each ----------------
  data_t preg [NP];
  int    p_writes [NP];
  // a request accepted at a rising edge is answered in the next cycle
  always @(posedge clk) begin
    for (int k = 0; k < NP; k++) begin
      if (p_rsp_valid[k] && p_rsp_ready[k]) p_rsp_valid[k] <= 1'b0;
      if (p_req_valid[k] && p_req_ready[k]) begin
        if (is_write(p_req.op)) begin preg[k] = p_req.data; p_writes[k]++; end
        p_rsp[k].data   <= preg[k];
        p_rsp[k].source <= p_req.source;
        p_rsp_valid[k]  <= 1'b1;
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int n_hit, n_miss, n_wb, n_conf, n_irq, n_illegal, n_flush, n_contend;
  logic irq_d;
  always @(posedge clk) begin
    n_hit  += int'(l2_events[0]); n_miss += int'(l2_events[1]);
    n_wb   += int'(l2_events[2]); n_conf += int'(l2_events[3]);
    n_illegal += $countones(csr_illegal);
    n_irq  += int'(ac_irq && !irq_d);
    irq_d  <= ac_irq;
    if (core_req_valid == '1 && core_req_ready != '1 && core_req_ready != '0) n_contend++;
  end
  int n_mem_viol, n_per_viol, n_dma_viol, n_alloc;

  // ---------------- bus-master tasks ----------------
  task automatic core_acc(input int c, input tl_op_e op, input addr_t a, input data_t d, output data_t r);
    core_req[c] = '{op: op, addr: a, data: d, mask: '1, eid: '0, source: '0};
    @(negedge clk); core_req_valid[c] = 1;
    #1; while (!core_req_ready[c]) begin @(negedge clk); #1; end
    @(negedge clk); core_req_valid[c] = 0;
    while (!core_rsp_valid[c]) @(negedge clk);
    r = core_rsp[c].data;
    @(negedge clk);
  endtask
  task automatic wr(input int c, input addr_t a, input data_t d);
    data_t r; core_acc(c, OP_PUT, a, d, r);
  endtask
  task automatic rd(input int c, input addr_t a, output data_t r);
    core_acc(c, OP_GET, a, '0, r);
  endtask
  task automatic rd_chk(input int c, input addr_t a, input data_t exp, input string m);
    data_t r; rd(c, a, r);
    chk(r == exp, $sformatf("%s: core%0d %h got %h exp %h", m, c, a, r, exp));
  endtask
  task automatic csr_wr(input int c, input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); csr_we[c] = 1; csr_addr[c] = a; csr_wdata[c] = d;
    @(negedge clk); csr_we[c] = 0;
  endtask
  task automatic dma_acc(input int k, input tl_op_e op, input addr_t a, input data_t d, output data_t r);
    dma_req[k] = '{op: op, addr: a, data: d, mask: '1, eid: '0, source: '0};
    @(negedge clk); dma_req_valid[k] = 1;
    #1; while (!dma_req_ready[k]) begin @(negedge clk); #1; end
    @(negedge clk); dma_req_valid[k] = 0;
    while (!dma_rsp_valid[k]) @(negedge clk);
    r = dma_rsp[k].data;
    @(negedge clk);
  endtask
  // trap core c into machine mode; dirty L1 lines are written back on request
  task automatic trap(input int c, input bit has_dirty, input addr_t wb_a, input data_t wb_d);
    @(negedge clk); trap_m[c] = 1;
    @(negedge clk); trap_m[c] = 0;
    if (l1_flush_req[c]) begin
      n_flush++;
      chk(trap_busy[c], "core stalled during flush");
      if (has_dirty) begin
        data_t r;
        chk(core_eid[c] != EID_SM, "write-back issued before eid changes");
        core_acc(c, OP_RELEASE_DATA, wb_a, wb_d, r);
      end
      @(negedge clk); l1_flush_done[c] = 1;
      @(negedge clk); l1_flush_done[c] = 0;
    end
    chk(core_eid[c] == EID_SM, "eid is the monitor's after the trap");
  endtask

  // ---------------- status helper ----------------
  // only the monitor may reach the control bus: c must run the monitor
  task automatic read_status(input int c, output logic [3:0] s);
    data_t r; rd(c, CTRL + 32'h800, r); s = r[3:0];
  endtask


  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired at %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam addr_t OSBUF = OSM + 32'h4000;
  initial begin
    data_t r;
    logic [3:0] st;
    int n_ok [2];
    for (int c = 0; c < NC; c++) begin core_req[c] = '0; csr_addr[c] = '0; csr_wdata[c] = '0; end
    for (int k = 0; k < NP; k++) begin p_rsp[k] = '0; preg[k] = '0; p_writes[k] = 0; end
    dma_req[0] = '0; dma_req[1] = '0; mem_rsp_rdata = '0; irq_d = 0;
    {n_hit, n_miss, n_wb, n_conf, n_irq, n_illegal, n_flush, n_contend} = '0;
    {n_mem_viol, n_per_viol, n_dma_viol, n_alloc} = '0;
    n_ok = '{0, 0};
    repeat (3) @(negedge clk); rst_n = 1;

    wr(0, CTRL + 32'h000 + (2*1)  * 8, ENC);          wr(0, CTRL + 32'h000 + (2*1+1)  * 8, 32'hFFF0_0000);
    wr(0, CTRL + 32'h000 + (2*15) * 8, SMM);          wr(0, CTRL + 32'h000 + (2*15+1) * 8, 32'hFFFF_F000);
    // DMA page: device 0 at indices 0..2, device 1 at 3..5
    wr(0, CTRL + 32'h400 + 0 * 8, DMAR);              wr(0, CTRL + 32'h400 + 1 * 8, 32'hFFFF_F000);
    wr(0, CTRL + 32'h400 + 2 * 8, 32'h1);
    wr(0, CTRL + 32'h400 + 3 * 8, OSBUF);             wr(0, CTRL + 32'h400 + 4 * 8, 32'hFFFF_F000);
    wr(0, CTRL + 32'h400 + 5 * 8, 32'h0);
    rd_chk(0, CTRL + 32'h400 + 0 * 8, 64'(DMAR), "device 0 base reads back");
    rd_chk(0, CTRL + 32'h400 + 3 * 8, 64'(OSBUF), "device 1 base reads back");
    rd_chk(0, CTRL + 32'h400 + 2 * 8, 64'h1, "device 0 owner reads back");
    rd_chk(0, CTRL + 32'h400 + 6 * 8, 64'h0, "no third device");
    csr_wr(0, 12'h7C0, 32'h1);
    csr_wr(1, 12'h7C0, 32'h0);

    fork
      for (int n = 0; n < 40; n++) begin
        dma_acc(0, OP_PUT, DMAR + addr_t'(n * 8), 64'hD000 + 64'(n), r); n_ok[0]++;
        dma_acc(0, OP_PUT, OSBUF + addr_t'(n * 8), 64'hBAD0, r); n_dma_viol++;
      end
      for (int n = 0; n < 40; n++) begin
        dma_acc(1, OP_PUT, OSBUF + addr_t'(n * 8), 64'hD100 + 64'(n), r); n_ok[1]++;
        dma_acc(1, OP_GET, DMAR + addr_t'(n * 8), '0, r); n_dma_viol++;
        chk(r == 64'h0, "OS device cannot read the enclave's buffer");
        dma_acc(1, OP_PUT, SMM, 64'hBAD1, r); n_dma_viol++;
      end
      for (int n = 0; n < 40; n++) rd(1, OSM + addr_t'(n * 64), r);
    join
    for (int n = 0; n < 40; n++) begin
      rd_chk(0, DMAR + addr_t'(n * 8), 64'hD000 + 64'(n), "enclave sees its device's data");
      rd_chk(1, OSBUF + addr_t'(n * 8), 64'hD100 + 64'(n), "OS sees its device's data");
    end
    chk(ac_irq, "interrupt raised by DMA violations");
    trap(1, 0, '0, '0);
    rd_chk(1, SMM, init_word(SMM), "monitor memory unchanged by DMA");
    read_status(1, st);
    chk(st[2], $sformatf("DMA violation recorded (%b)", st));
    chk(n_ok[0] == 40 && n_ok[1] == 40 && n_dma_viol == 120, "all DMA transfers done");
    chk(n_contend > 0 || n_irq > 0, "traffic ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
