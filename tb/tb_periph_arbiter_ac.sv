// tb_periph_arbiter_ac: self-checking test of the peripheral arbiter's access
// control. Region 0 (control bus) is readable and writable by the monitor only;
// region 1 is bound to enclave 2 (read and write); region 2 is shared: the OS
// may read and write, enclave 3 may only read. For each context and direction
// the expected decision follows from these bitmaps as set up here; refused
// requests must leave with the sink address and zero data and raise viol.
// Addresses outside every region pass.
module tb_periph_arbiter_ac;
  import cure_pkg::*;
  localparam addr_t SINK = 32'h1000_F000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic [1:0] in_req_valid = '0, in_req_ready, in_rsp_valid, in_rsp_ready = '1;
  tl_req_t in_req [2];
  tl_rsp_t in_rsp [2];
  logic out_req_valid, out_req_ready = 1, out_rsp_valid = 0, out_rsp_ready;
  tl_req_t out_req;
  tl_rsp_t out_rsp;
  logic viol;
  addr_t viol_addr;
  logic cfg_we = 0;
  logic [5:0] cfg_idx = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;

  periph_arbiter_ac #(.N_PORTS(2), .N_REGIONS(4), .SINK_ADDR(SINK)) dut (.*);

  task automatic cfg(input int idx, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_idx = 6'(idx); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic xact(input int p, input eid_t e, input addr_t a, input bit wr, input bit exp);
    in_req[p] = '0;
    in_req[p].op = wr ? OP_PUT : OP_GET; in_req[p].addr = a; in_req[p].data = 64'hCAFE;
    in_req[p].eid = e; in_req[p].source = 2'(p);
    @(negedge clk); in_req_valid[p] = 1; #1;
    chk(out_req_valid, "forwarded");
    chk(viol == !exp, $sformatf("viol eid=%h addr=%h wr=%0d", e, a, wr));
    chk(out_req.addr == (exp ? a : SINK), $sformatf("addr eid=%h addr=%h wr=%0d", e, a, wr));
    chk(out_req.data == (exp ? 64'hCAFE : 64'h0), "data");
    @(negedge clk); in_req_valid[p] = 0;
    out_rsp = '0; out_rsp_valid = 1;
    @(negedge clk); out_rsp_valid = 0;
  endtask

  function automatic logic [31:0] rw(int e, bit r, bit w);
    logic [31:0] v = '0;
    v[2*e] = r; v[2*e+1] = w;
    return v;
  endfunction

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2; i++) in_req[i] = '0;
    out_rsp = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // before configuration everything passes
    xact(0, 4'h0, 32'h1000_1000, 1, 1);
    cfg(0, 32'h1000_0000); cfg(1, 32'hFFFF_F000); cfg(2, rw(15, 1, 1));
    cfg(3, 32'h1000_1000); cfg(4, 32'hFFFF_F000); cfg(5, rw(2, 1, 1));
    cfg(6, 32'h1000_2000); cfg(7, 32'hFFFF_F000); cfg(8, rw(0, 1, 1) | rw(3, 1, 0));
    cfg_idx = 6'd8; #1 chk(cfg_rdata == (rw(0,1,1) | rw(3,1,0)), "bitmap readback");
    for (int e = 0; e < 16; e++) begin
      for (int wr = 0; wr < 2; wr++) begin
        xact(e % 2, 4'(e), 32'h1000_0010, wr[0], e == 15);
        xact(e % 2, 4'(e), 32'h1000_1FF8, wr[0], e == 2);
        xact(e % 2, 4'(e), 32'h1000_2008, wr[0], e == 0 || (e == 3 && wr == 0));
        xact(e % 2, 4'(e), 32'h1000_5000, wr[0], 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
