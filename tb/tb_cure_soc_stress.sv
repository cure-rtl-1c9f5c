// tb_cure_soc_stress: concurrent random traffic through the whole SoC at the
// default configuration, in the spirit of the paper's stress runs of an
// enclave beside a loaded OS on the second core. The monitor configures
// enclave 1 (1 MiB region, CP-STRICT with two exclusive L2 ways, a DMA
// buffer of 4 KiB) and then three threads run at the same time:
//   * core 0 as enclave 1: random reads and writes on 32 lines of its region
//     that map onto 8 cache sets (4 tags per set, so its two ways thrash and
//     dirty lines are written back), checked against a reference copy;
//   * core 1 as the OS: random reads and writes on 32 lines of OS memory that
//     map onto the same sets, and now and then an attack on the enclave's
//     lines - its reads must return zero and its writes must change nothing;
//   * the DMA device: random reads and writes in its buffer, and now and then
//     an access outside it, which must read zero and write nothing.
// Afterwards the enclave reads back all its lines and the DMA buffer, the OS
// all its lines, and the OS core traps into the monitor, which must find the
// memory and DMA violations in the status register. It counts contention,
// write-backs, violations and the interrupt, and fails if any never happened.
// Bus models and task timing are the same as in tb_cure_soc.
module tb_cure_soc_stress;
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
  logic [0:0]    dma_req_valid = '0, dma_req_ready, dma_rsp_valid, dma_rsp_ready = '1;
  tl_req_t       dma_req [1];
  tl_rsp_t       dma_rsp [1];
  logic [NP-1:0] p_req_valid, p_req_ready = '1, p_rsp_valid = '0, p_rsp_ready;
  tl_req_t       p_req;
  tl_rsp_t       p_rsp [NP];
  logic          mem_req_valid, mem_req_ready = 1, mem_req_write, mem_rsp_valid = 0;
  addr_t         mem_req_addr;
  line_t         mem_req_wdata, mem_rsp_rdata;
  logic          ac_irq;
  logic [3:0]    l2_events;

  cure_soc dut (.*);

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
  task automatic dma_acc(input tl_op_e op, input addr_t a, input data_t d, output data_t r);
    dma_req[0] = '{op: op, addr: a, data: d, mask: '1, eid: '0, source: '0};
    @(negedge clk); dma_req_valid = 1;
    #1; while (!dma_req_ready) begin @(negedge clk); #1; end
    @(negedge clk); dma_req_valid = 0;
    while (!dma_rsp_valid) @(negedge clk);
    r = dma_rsp[0].data;
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired at %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int OPS = 400;
  data_t ref_enc [addr_t], ref_os [addr_t], ref_dma [addr_t];
  function automatic addr_t pool(addr_t base, int i);
    // 32 lines: 4 tags x 8 sets, 4 words used per line
    return base + addr_t'((i % 4) * 32'h2_0000 + ((i / 4) % 8) * 64 + (i / 32) * 8);
  endfunction
  function automatic data_t ref_rd(ref data_t m [addr_t], input addr_t a);
    return m.exists(a) ? m[a] : init_word(a);
  endfunction
  int n_enc_ops, n_os_attacks, n_dma_attacks;

  initial begin
    data_t r;
    logic [3:0] st;
    for (int c = 0; c < NC; c++) begin core_req[c] = '0; csr_addr[c] = '0; csr_wdata[c] = '0; end
    for (int k = 0; k < NP; k++) begin p_rsp[k] = '0; preg[k] = '0; p_writes[k] = 0; end
    dma_req[0] = '0; mem_rsp_rdata = '0; irq_d = 0;
    {n_hit, n_miss, n_wb, n_conf, n_irq, n_illegal, n_flush, n_contend} = '0;
    {n_mem_viol, n_per_viol, n_dma_viol, n_alloc} = '0;
    {n_enc_ops, n_os_attacks, n_dma_attacks} = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- the monitor (core 0) configures the primitives ----
    wr(0, CTRL + 32'h000 + (2*1)  * 8, ENC);          wr(0, CTRL + 32'h000 + (2*1+1)  * 8, 32'hFFF0_0000);
    wr(0, CTRL + 32'h000 + (2*15) * 8, SMM);          wr(0, CTRL + 32'h000 + (2*15+1) * 8, 32'hFFFF_F000);
    wr(0, CTRL + 32'h200 + 2 * 8, 32'hC000_0000);     // control bus: monitor only
    wr(0, CTRL + 32'h200 + 0 * 8, CTRL);              wr(0, CTRL + 32'h200 + 1 * 8, 32'hFFFF_F000);
    wr(0, CTRL + 32'h400 + 0 * 8, DMAR);              wr(0, CTRL + 32'h400 + 1 * 8, 32'hFFFF_F000);
    wr(0, CTRL + 32'h400 + 2 * 8, 32'h1);
    wr(0, CTRL + 32'h600 + 0 * 8, 32'h11);            // enclave 1: CP-STRICT
    wr(0, CTRL + 32'h600 + 1 * 8, 32'h1 | (2 << 8));  // two exclusive ways
    rd(0, CTRL + 32'h600, r);
    chk(r[31], "allocation of two ways accepted"); n_alloc += int'(r[31]);
    csr_wr(0, 12'h7C0, 32'h1);
    csr_wr(1, 12'h7C0, 32'h0);
    chk(core_eid[0] == 4'h1 && core_eid[1] == 4'h0, "eids set by the monitor");

    fork
      // enclave 1 on core 0
      for (int n = 0; n < OPS; n++) begin
        addr_t a; a = pool(ENC, int'($urandom % 128));
        if ($urandom % 2) begin
          data_t d; d = {$urandom, $urandom};
          wr(0, a, d); ref_enc[a] = d;
        end else rd_chk(0, a, ref_rd(ref_enc, a), "enclave read");
        n_enc_ops++;
      end
      // the OS on core 1
      for (int n = 0; n < OPS; n++) begin
        int i; i = int'($urandom % 128);
        if ($urandom % 4 == 0) begin
          addr_t a; a = pool(ENC, i);
          n_os_attacks++; n_mem_viol++;
          if ($urandom % 2) wr(1, a, 64'hBAD0_0000 | 64'(n));
          else rd_chk(1, a, 64'h0, "OS read of enclave memory returns zero");
        end else begin
          addr_t a; a = pool(OSM, i);
          if ($urandom % 2) begin
            data_t d; d = {$urandom, $urandom};
            wr(1, a, d); ref_os[a] = d;
          end else rd_chk(1, a, ref_rd(ref_os, a), "OS read");
        end
      end
      // the DMA device
      for (int n = 0; n < OPS / 2; n++) begin
        addr_t a;
        if ($urandom % 4 == 0) begin
          a = ($urandom % 2) ? pool(ENC, int'($urandom % 128)) : pool(OSM, int'($urandom % 128));
          n_dma_attacks++; n_dma_viol++;
          if ($urandom % 2) dma_acc(OP_PUT, a, 64'hD0D0_BAD0, r);
          else begin dma_acc(OP_GET, a, '0, r); chk(r == 64'h0, "DMA read outside its buffer returns zero"); end
        end else begin
          a = DMAR + addr_t'(($urandom % 512) * 8);
          if ($urandom % 2) begin
            data_t d; d = {$urandom, $urandom};
            dma_acc(OP_PUT, a, d, r); ref_dma[a] = d;
          end else begin
            dma_acc(OP_GET, a, '0, r);
            chk(r == ref_rd(ref_dma, a), "DMA read of its buffer");
          end
        end
      end
    join

    // ---- final state ----
    for (int i = 0; i < 128; i++) rd_chk(0, pool(ENC, i), ref_rd(ref_enc, pool(ENC, i)), "enclave data intact");
    for (int i = 0; i < 128; i++) rd_chk(1, pool(OSM, i), ref_rd(ref_os, pool(OSM, i)), "OS data intact");
    foreach (ref_dma[a]) rd_chk(0, a, ref_dma[a], "enclave sees DMA data");
    trap(1, 0, '0, '0);
    read_status(1, st);
    chk(st[0] && st[2], $sformatf("memory and DMA violations recorded (%b)", st));

    $display("enclave ops=%0d os attacks=%0d dma attacks=%0d contend=%0d", n_enc_ops, n_os_attacks, n_dma_attacks, n_contend);
    $display("l2 hit=%0d miss=%0d wb=%0d conflict=%0d irq=%0d", n_hit, n_miss, n_wb, n_conf, n_irq);
    chk(n_os_attacks > 0 && n_dma_attacks > 0, "attacks happened");
    chk(n_contend > 0, "arbitration contention happened");
    chk(n_hit > 0 && n_miss > 0, "L2 hits and misses happened");
    chk(n_wb > 0, "L2 write-backs happened");
    chk(n_irq > 0, "interrupt happened");
    chk(n_alloc > 0, "CP-STRICT allocation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
