// tb_dma_port_ac: self-checking test of the DMA port filter. Before any
// configuration the device may reach nothing. After the monitor gives it a
// 4 KiB region and owner enclave 6, requests inside pass unchanged except for
// the owner eid, and requests outside (including MMIO) are redirected to the
// sink with zero data and raise viol. Handshakes must pass straight through.
module tb_dma_port_ac;
  import cure_pkg::*;
  localparam addr_t SINK = 32'h8000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic dma_req_valid = 0, dma_req_ready, dma_rsp_valid, dma_rsp_ready = 1;
  tl_req_t dma_req;
  tl_rsp_t dma_rsp;
  logic out_req_valid, out_req_ready = 1, out_rsp_valid = 0, out_rsp_ready;
  tl_req_t out_req;
  tl_rsp_t out_rsp;
  logic viol;
  addr_t viol_addr;
  logic cfg_we = 0;
  logic [5:0] cfg_idx = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;

  dma_port_ac #(.SINK_ADDR(SINK)) dut (.*);

  task automatic cfg(input int idx, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_idx = 6'(idx); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic probe(input addr_t a, input bit exp, input eid_t owner);
    dma_req = '0; dma_req.op = OP_PUT; dma_req.addr = a; dma_req.data = 64'h77; dma_req.mask = '1;
    dma_req_valid = 1; #1;
    chk(viol == !exp, $sformatf("viol at %h", a));
    chk(out_req.addr == (exp ? a : SINK), $sformatf("addr at %h", a));
    chk(out_req.data == (exp ? 64'h77 : 64'h0), "data");
    chk(out_req.eid == owner, "owner eid attached");
    out_req_ready = 0; #1 chk(!dma_req_ready, "ready passes through");
    out_req_ready = 1;
    @(negedge clk); dma_req_valid = 0;
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dma_req = '0; out_rsp = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    probe(32'h8018_0000, 0, 4'h0);
    cfg(0, 32'h8018_0000); cfg(1, 32'hFFFF_F000); cfg(2, 32'h6);
    cfg_idx = 6'd2; #1 chk(cfg_rdata == 32'h6, "owner readback");
    @(negedge clk);
    probe(32'h8018_0000, 1, 4'h6);
    probe(32'h8018_0FF8, 1, 4'h6);
    probe(32'h8018_1000, 0, 4'h6);
    probe(32'h8017_FFF8, 0, 4'h6);
    probe(32'h1000_0000, 0, 4'h6);
    out_rsp.data = 64'h99; out_rsp_valid = 1; #1;
    chk(dma_rsp_valid && dma_rsp.data == 64'h99, "response passes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
