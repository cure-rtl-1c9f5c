// tb_bus_arbiter: self-checking test of the round-robin bus arbiter with three
// masters (two cores and a DMA port, as at the memory arbiter).
// Every cycle each idle master starts a request with probability 1/2 and holds
// it until it is accepted; the slave accepts with probability 3/4 and answers
// 0-3 cycles later; masters accept responses with probability 3/4. A reference
// model of the round-robin pointer and of the single outstanding transaction
// gives, for every cycle, the expected grant (the first requesting master at or
// after the pointer, presented in the same cycle), the ready vector, and where
// the response goes. It also checks fairness: while a master waits, at most
// two other masters are granted. All signals are driven at falling edges and
// checked 1 ns later.
module tb_bus_arbiter;
  import cure_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endtask

  logic [N-1:0] in_req_valid = '0, in_req_ready, in_rsp_valid, in_rsp_ready = '0;
  tl_req_t      in_req [N];
  tl_rsp_t      in_rsp [N];
  logic         gnt_valid, out_req_ready = 0, out_rsp_valid = 0, out_rsp_ready;
  tl_req_t      gnt_req;
  logic [1:0]   gnt_idx;
  tl_rsp_t      out_rsp;

  bus_arbiter #(.N(N)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_ptr = 0, ref_owner = 0, wait_grants [N], grants [N], served [N];
  bit ref_busy = 0, pend [N];
  int rsp_delay = 0;
  data_t owner_tag;
  initial begin
    int cnt;
    for (int i = 0; i < N; i++) begin
      in_req[i] = '0; pend[i] = 0; wait_grants[i] = 0; grants[i] = 0; served[i] = 0;
    end
    out_rsp = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    cnt = 0;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      int exp_idx;
      bit any, acc, rsp_hs;
      @(negedge clk);
      // stimulus
      for (int i = 0; i < N; i++) begin
        if (!pend[i] && !in_req_valid[i] && ($urandom % 2 == 0)) begin
          in_req[i] = '0;
          in_req[i].addr = addr_t'(cnt); in_req[i].data = data_t'(cnt); in_req[i].source = 2'(i);
          cnt++;
          in_req_valid[i] = 1'b1;
          pend[i] = 1'b1;
        end
        in_rsp_ready[i] = ($urandom % 4 != 0);
      end
      out_req_ready = ($urandom % 4 != 0);
      if (ref_busy && rsp_delay == 0) begin
        out_rsp_valid = 1'b1; out_rsp.data = owner_tag; out_rsp.source = 2'(ref_owner);
      end else out_rsp_valid = 1'b0;
      #1;
      // expected grant
      any = 1'b0; exp_idx = 0;
      for (int k = N-1; k >= 0; k--) if (in_req_valid[(ref_ptr + k) % N]) begin any = 1'b1; exp_idx = (ref_ptr + k) % N; end
      chk(gnt_valid == (!ref_busy && any), "grant only when idle and requested");
      if (gnt_valid) begin
        chk(int'(gnt_idx) == exp_idx, $sformatf("round-robin pick %0d, expected %0d", gnt_idx, exp_idx));
        chk(gnt_req.addr == in_req[exp_idx].addr, "granted request presented in the same cycle");
        chk(in_req_ready == (out_req_ready ? N'(1 << exp_idx) : '0), "ready only to the granted master");
      end else chk(in_req_ready == '0, "no ready without grant");
      if (ref_busy) begin
        chk(in_rsp_valid == (out_rsp_valid ? N'(1 << ref_owner) : '0), "response only to the owner");
        if (out_rsp_valid) chk(in_rsp[ref_owner].data == owner_tag, "response data passed");
        chk(out_rsp_ready == in_rsp_ready[ref_owner], "owner's ready passed to the slave");
      end else chk(in_rsp_valid == '0, "no response while idle");
      // reference update for the coming rising edge
      acc    = gnt_valid && out_req_ready;
      rsp_hs = ref_busy && out_rsp_valid && in_rsp_ready[ref_owner];
      if (acc) begin
        for (int i = 0; i < N; i++) if (i != exp_idx && in_req_valid[i]) begin
          wait_grants[i]++;
          chk(wait_grants[i] <= N - 1, $sformatf("master %0d starved", i));
        end
        wait_grants[exp_idx] = 0;
        grants[exp_idx]++;
        ref_busy = 1'b1; ref_owner = exp_idx; ref_ptr = (exp_idx + 1) % N;
        owner_tag = in_req[exp_idx].data ^ 64'hA5A5;
        rsp_delay = int'($urandom % 4);
        @(posedge clk); #1 in_req_valid[exp_idx] = 1'b0;
      end else if (rsp_hs) begin
        ref_busy = 1'b0; pend[ref_owner] = 1'b0; served[ref_owner]++;
      end else if (ref_busy && rsp_delay > 0) rsp_delay--;
    end
    for (int i = 0; i < N; i++) chk(served[i] > 100, $sformatf("master %0d served %0d times", i, served[i]));
    $display("grants: %0d %0d %0d", grants[0], grants[1], grants[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
