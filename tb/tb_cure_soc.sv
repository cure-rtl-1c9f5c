// tb_cure_soc: end-to-end test of the SoC security primitives at the default
// configuration (2 cores, 1 DMA port, 3 peripherals, 2 MiB 16-way L2).
// The testbench plays the monitor, an enclave, the OS, a DMA device, three
// register peripherals and main memory. It configures every primitive over
// MMIO, then runs enclave, OS and DMA traffic and checks each result against
// values the testbench tracks itself. It counts how often each mechanism of
// the design happened and counts a failure for any that never did:
// memory, MMIO and DMA violations, the interrupt, a refused CSR write, the
// flush-before-eid handshake, arbitration contention, and cache hit, miss,
// write-back, conflicting copy and CP-STRICT way allocation.
// Timing: the bus-master tasks raise valid at a falling edge, look at ready
// 1 ns later and sample responses at falling edges; the memory and peripheral
// models change their outputs only at rising edges (like registers) and
// answer in the cycle after they accept a request. The check of an L2 hit
// latency is done in the block test of l2_cache.
module tb_cure_soc;
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
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired at %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t r, x;
    logic [3:0] st;
    for (int c = 0; c < NC; c++) begin core_req[c] = '0; csr_addr[c] = '0; csr_wdata[c] = '0; end
    for (int k = 0; k < NP; k++) begin p_rsp[k] = '0; preg[k] = '0; p_writes[k] = 0; end
    dma_req[0] = '0; mem_rsp_rdata = '0; irq_d = 0;
    {n_hit, n_miss, n_wb, n_conf, n_irq, n_illegal, n_flush, n_contend} = '0;
    {n_mem_viol, n_per_viol, n_dma_viol, n_alloc} = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    chk(core_eid[0] == EID_SM && core_eid[1] == EID_SM, "cores start in the monitor");

    // ---- the monitor (core 0) configures the primitives ----
    wr(0, CTRL + 32'h000 + (2*1)  * 8, ENC);          wr(0, CTRL + 32'h000 + (2*1+1)  * 8, 32'hFFF0_0000);
    wr(0, CTRL + 32'h000 + (2*14) * 8, 32'h8000_0000); wr(0, CTRL + 32'h000 + (2*14+1) * 8, 32'hFFFF_F000);
    wr(0, CTRL + 32'h000 + (2*15) * 8, SMM);          wr(0, CTRL + 32'h000 + (2*15+1) * 8, 32'hFFFF_F000);
    // bitmap before mask: a region becomes active when its mask is written
    wr(0, CTRL + 32'h200 + 2 * 8, 32'hC000_0000);     // control bus: monitor only
    wr(0, CTRL + 32'h200 + 0 * 8, CTRL);              wr(0, CTRL + 32'h200 + 1 * 8, 32'hFFFF_F000);
    wr(0, CTRL + 32'h200 + 3 * 8, CTRL + 32'h1000);   wr(0, CTRL + 32'h200 + 4 * 8, 32'hFFFF_F000);
    wr(0, CTRL + 32'h200 + 5 * 8, 32'h0000_000C);     // peripheral 0: enclave 1 only
    wr(0, CTRL + 32'h200 + 6 * 8, CTRL + 32'h2000);   wr(0, CTRL + 32'h200 + 7 * 8, 32'hFFFF_F000);
    wr(0, CTRL + 32'h200 + 8 * 8, 32'h0000_0007);     // peripheral 1: OS rw, enclave 1 read
    wr(0, CTRL + 32'h400 + 0 * 8, DMAR);              wr(0, CTRL + 32'h400 + 1 * 8, 32'hFFFF_F000);
    wr(0, CTRL + 32'h400 + 2 * 8, 32'h1);             // DMA device bound to enclave 1
    wr(0, CTRL + 32'h600 + 0 * 8, 32'h11);            // enclave 1: CP-STRICT
    wr(0, CTRL + 32'h600 + 1 * 8, 32'h1 | (1 << 8));  // one exclusive way
    rd(0, CTRL + 32'h600, r);
    chk(r[31], "way allocation accepted"); n_alloc += int'(r[31]);
    rd_chk(0, CTRL + 32'h600 + 17 * 8, 64'h0001_0001, "enclave 1 owns way 0 in CP-STRICT");
    rd_chk(0, CTRL + 32'h000 + 3 * 8, 64'hFFF0_0000, "region readback");

    // ---- contexts: core 0 runs enclave 1, core 1 the OS ----
    csr_wr(0, 12'h7C0, 32'h1);
    csr_wr(1, 12'h7C0, 32'h0);
    chk(core_eid[0] == 4'h1 && core_eid[1] == 4'h0, "eids set by the monitor");
    csr_wr(0, 12'h305, 32'h0);
    chk(core_mtvec[0] == 32'h8000_0000, "enclave cannot move mtvec");
    csr_wr(1, 12'h7C0, 32'hF);
    chk(core_eid[1] == 4'h0, "OS cannot become the monitor");

    // ---- enclave memory ----
    x = 64'h0123_4567_89AB_CDEF;
    wr(0, ENC, x);
    rd_chk(0, ENC, x, "enclave reads own data");
    rd_chk(0, ENC + 8, init_word(ENC + 8), "enclave reads memory");
    rd_chk(1, ENC, 64'h0, "OS read of enclave memory returns zero");
    n_mem_viol++;
    wr(1, ENC + 8, 64'hBAD0_BAD0);
    rd_chk(0, ENC + 8, init_word(ENC + 8), "OS write to enclave memory has no effect");
    rd_chk(1, OSM, init_word(OSM), "OS reads own memory");
    rd_chk(0, OSM, 64'h0, "enclave cannot read OS memory");
    chk(ac_irq, "interrupt raised");

    // ---- MMIO ----
    wr(1, CTRL + 32'h000 + 2 * 8, 32'h0);            // OS tries to move enclave region
    n_per_viol++;
    rd_chk(0, CTRL + 32'h000 + 2 * 8, 64'h0, "enclave cannot read the control bus");
    wr(0, CTRL + 32'h1000, 64'hE1);
    chk(preg[0] == 64'hE1, "enclave writes its peripheral");
    rd_chk(1, CTRL + 32'h1000, 64'h0, "OS cannot read the enclave's peripheral");
    wr(1, CTRL + 32'h2000, 64'h05);
    rd_chk(0, CTRL + 32'h2000, 64'h05, "shared peripheral readable by enclave");
    wr(0, CTRL + 32'h2000, 64'hE2);
    chk(preg[1] == 64'h05, "enclave write to read-only peripheral refused");
    wr(1, CTRL + 32'h3000, 64'h33);
    chk(preg[2] == 64'h33, "unprotected peripheral open");

    // ---- arbitration contention ----
    fork
      rd_chk(0, ENC, x, "contended enclave read");
      rd_chk(1, OSM + 8, init_word(OSM + 8), "contended OS read");
    join

    // ---- DMA ----
    dma_acc(OP_PUT, DMAR + 16, 64'hD0D0_0001, r);
    rd_chk(0, DMAR + 16, 64'hD0D0_0001, "enclave sees DMA data");
    dma_acc(OP_PUT, OSM + 16, 64'hD0D0_0002, r);
    n_dma_viol++;
    rd_chk(1, OSM + 16, init_word(OSM + 16), "DMA outside its buffer refused");
    dma_acc(OP_GET, ENC, 64'h0, r);
    chk(r == 64'h0, "DMA read outside its buffer returns zero");

    // ---- CP-STRICT with one way: dirty evictions inside the enclave ----
    for (int k = 1; k <= 3; k++) wr(0, ENC + addr_t'(k) * 32'h2_0000, 64'(k));
    for (int k = 1; k <= 3; k++) rd_chk(0, ENC + addr_t'(k) * 32'h2_0000, 64'(k), "evicted data intact");
    rd_chk(0, ENC, x, "first line refetched");

    // ---- OS core traps into the monitor; monitor reads enclave data ----
    trap(1, 0, '0, '0);
    rd_chk(1, ENC, x, "monitor reads enclave data (owner-eid conflict in L2)");

    // ---- malicious dirty line written back during the enclave's trap ----
    trap(0, 1, SMM, 64'hBAD);
    rd_chk(0, SMM, init_word(SMM), "write-back under the enclave's eid cannot reach monitor memory");

    // ---- monitor handles the interrupt ----
    read_status(0, st);
    chk(st == 4'b0111, $sformatf("memory, MMIO and DMA violations recorded (%b)", st));
    wr(0, CTRL + 32'h800, 64'hF);
    chk(!ac_irq, "interrupt cleared");

    // ---- mechanisms ----
    $display("mem_viol=%0d per_viol=%0d dma_viol=%0d irq=%0d illegal=%0d flush=%0d contend=%0d",
             n_mem_viol, n_per_viol, n_dma_viol, n_irq, n_illegal, n_flush, n_contend);
    $display("l2 hit=%0d miss=%0d wb=%0d conflict=%0d alloc=%0d", n_hit, n_miss, n_wb, n_conf, n_alloc);
    chk(n_mem_viol > 0 && n_per_viol > 0 && n_dma_viol > 0, "all violation kinds happened");
    chk(n_irq > 0, "interrupt happened");
    chk(n_illegal >= 2, "refused CSR writes happened");
    chk(n_flush >= 2, "flush-before-eid happened");
    chk(n_contend > 0, "arbitration contention happened");
    chk(n_hit > 0, "L2 hit happened");
    chk(n_miss > 0, "L2 miss happened");
    chk(n_wb > 0, "L2 write-back happened");
    chk(n_conf > 0, "L2 conflicting copy happened");
    chk(n_alloc > 0, "CP-STRICT allocation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
