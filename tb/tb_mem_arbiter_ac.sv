// tb_mem_arbiter_ac: self-checking test of the memory arbiter's access control.
// Regions: enclave 1, enclave 5, firmware (0xE) and monitor (0xF). For every
// context (OS, enclaves 1, 5 and 9, firmware, monitor) and a set of addresses
// inside and outside the regions, the expected decision is worked out by the
// rules of the design written here independently (enclave: own region only;
// OS: outside all regions; firmware: own region or outside all; monitor:
// everything). A refused access must leave the arbiter with the sink address and
// zero data in the same cycle and raise viol. The unchecked DMA port passes
// everything. Two simultaneous requesters must be served alternately.
module tb_mem_arbiter_ac;
  import cure_pkg::*;
  localparam addr_t SINK = 32'h8000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic [2:0] in_req_valid = '0, in_req_ready, in_rsp_valid, in_rsp_ready = '1;
  tl_req_t in_req [3];
  tl_rsp_t in_rsp [3];
  logic out_req_valid, out_req_ready = 1, out_rsp_valid = 0, out_rsp_ready;
  tl_req_t out_req;
  tl_rsp_t out_rsp;
  logic viol;
  addr_t viol_addr;
  logic cfg_we = 0;
  logic [5:0] cfg_idx = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;

  mem_arbiter_ac #(.N_PORTS(3), .CHECK_PORTS(32'h3), .SINK_ADDR(SINK)) dut (.*);

  // reference regions
  addr_t rb [16], rm [16];
  function automatic bit in_r(addr_t a, int i);
    return rm[i] != 0 && (a & rm[i]) == (rb[i] & rm[i]);
  endfunction
  function automatic bit ref_allowed(eid_t e, addr_t a);
    bit any = 0;
    for (int i = 1; i < 16; i++) if (in_r(a, i)) any = 1;
    case (e)
      4'hF: return 1;
      4'h0: return !any;
      4'hE: return in_r(a, 14) || !any;
      default: return in_r(a, int'(e));
    endcase
  endfunction

  task automatic cfg(input int idx, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_idx = 6'(idx); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // one transaction on port p; slave answers one cycle after acceptance
  task automatic xact(input int p, input eid_t e, input addr_t a, input bit chk_ac);
    bit exp;
    in_req[p] = '0;
    in_req[p].op = OP_PUT; in_req[p].addr = a; in_req[p].data = 64'h1234_5678_9ABC_DEF0;
    in_req[p].mask = '1; in_req[p].eid = e; in_req[p].source = 2'(p);
    exp = chk_ac ? ref_allowed(e, a) : 1'b1;
    @(negedge clk); in_req_valid[p] = 1; #1;
    chk(out_req_valid && in_req_ready[p], "granted at once");
    chk(viol == !exp, $sformatf("viol eid=%h addr=%h", e, a));
    chk(out_req.addr == (exp ? a : SINK), $sformatf("address eid=%h addr=%h", e, a));
    chk(out_req.data == (exp ? 64'h1234_5678_9ABC_DEF0 : 64'h0), "data zeroed when refused");
    chk(out_req.eid == e, "eid forwarded");
    @(negedge clk); in_req_valid[p] = 0;
    out_rsp.data = 64'h55; out_rsp.source = 2'(p); out_rsp_valid = 1; #1;
    chk(in_rsp_valid == 3'(1 << p), "response to requester only");
    @(negedge clk); out_rsp_valid = 0;
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  addr_t addrs [8];
  eid_t  eids [6];
  initial begin
    for (int i = 0; i < 3; i++) in_req[i] = '0;
    out_rsp = '0;
    for (int i = 0; i < 16; i++) begin rb[i] = '0; rm[i] = '0; end
    rb[1]  = 32'h8010_0000; rm[1]  = 32'hFFFF_0000;
    rb[5]  = 32'h8020_0000; rm[5]  = 32'hFFF0_0000;
    rb[14] = 32'h8000_1000; rm[14] = 32'hFFFF_F000;
    rb[15] = 32'h8000_2000; rm[15] = 32'hFFFF_E000;
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (rb[i]) if (i > 0 && rm[i] != 0) begin
      cfg(2*i, rb[i]); cfg(2*i+1, rm[i]);
    end
    cfg_idx = 6'd3; #1 chk(cfg_rdata == 32'hFFFF_0000, "mask readback");
    addrs = '{32'h8010_0040, 32'h8010_FFF8, 32'h8011_0000, 32'h8020_8000,
              32'h8000_1800, 32'h8000_3000, 32'h8040_0000, 32'h0000_0100};
    eids  = '{4'h0, 4'h1, 4'h5, 4'h9, 4'hE, 4'hF};
    foreach (eids[j]) foreach (addrs[k]) xact(j % 2, eids[j], addrs[k], 1);
    // DMA port is never checked by eid
    xact(2, 4'h0, 32'h8010_0040, 0);
    xact(2, 4'h3, 32'h8000_2000, 0);
    // round robin: ports 0 and 1 both request, twice
    for (int i = 0; i < 2; i++) in_req[i] = '{op: OP_GET, addr: 32'h8040_0000, data: '0, mask: '0, eid: 4'hF, source: 2'(i)};
    @(negedge clk); in_req_valid = 3'b011; #1;
    begin
      logic [2:0] first;
      first = in_req_ready;
      chk($onehot(first), "one grant");
      @(negedge clk); in_req_valid = in_req_valid & ~first;
      out_rsp_valid = 1; @(negedge clk); out_rsp_valid = 0; #1;
      chk(in_req_ready == (3'b011 & ~first), "other port served next");
      @(negedge clk); in_req_valid = 0;
      out_rsp_valid = 1; @(negedge clk); out_rsp_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
