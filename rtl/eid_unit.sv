// eid_unit: the per-core enclave-ID register (security primitive SP1).
//
// The unit holds the core's eid CSR, which names the execution context the core
// runs, and stamps it onto every memory transaction the core issues (including
// page-table-walker and L1 write-back traffic), which is how the eid travels on
// the bus. It also guards mtvec: eid and mtvec can be written only while eid is
// the security monitor's ID 0xF; a refused write raises csr_illegal for one cycle
// and leaves the register unchanged.
//
// When the core traps into machine mode (mtvec points into the monitor), the
// unit first asks the L1 to flush (l1_flush_req high until l1_flush_done) and
// only then sets eid to 0xF, so that dirty L1 lines of the interrupted context
// are written back under that context's own eid and never with monitor rights.
// trap_busy is high from the trap until eid has been set; the core stalls on it.
// A trap taken while eid is already 0xF needs no flush and changes nothing.
//
// Timing: eid changes on the clock edge after a permitted CSR write, or on the
// edge after l1_flush_done. Requests pass through combinationally.
// After reset eid is 0xF, since the boot path enters the monitor.
//
// Follows the design: the write guard, the flush-then-set order, the 4-bit
// eid. Own choices: the CSR number of eid (0x7C0, in the custom machine
// read/write range), the reset value of mtvec, and the flush handshake.
//
// Reset note: rst_n is also read by the assertions' disable iff, which lint
// reports as a synchronous use of an asynchronous reset; the flops use it
// asynchronously only.
module eid_unit
  import cure_pkg::*;
#(
  parameter logic [11:0] CSR_EID_ADDR   = 12'h7C0,
  parameter logic [11:0] CSR_MTVEC_ADDR = 12'h305,
  parameter logic [31:0] MTVEC_RESET    = 32'h8000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  // CSR access from the core
  input  logic        csr_we,
  input  logic [11:0] csr_addr,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  output logic        csr_illegal,
  // trap into machine mode
  input  logic        trap_m,
  output logic        trap_busy,
  output logic        l1_flush_req,
  input  logic        l1_flush_done,
  // current context
  output eid_t        eid,
  output logic [31:0] mtvec,
  // memory requests of the core
  input  tl_req_t     core_req,
  output tl_req_t     tagged_req
);

  typedef enum logic {S_RUN, S_FLUSH} state_e;
  state_e state_q;

  wire sm_ctx    = (eid == EID_SM);
  wire guarded   = (csr_addr == CSR_EID_ADDR) || (csr_addr == CSR_MTVEC_ADDR);
  wire wr_ok     = csr_we && guarded && sm_ctx && state_q == S_RUN;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_RUN;
      eid         <= EID_SM;
      mtvec       <= MTVEC_RESET;
      csr_illegal <= 1'b0;
    end else begin
      csr_illegal <= csr_we && guarded && !wr_ok;
      unique case (state_q)
        S_RUN: begin
          if (trap_m && !sm_ctx) begin
            state_q <= S_FLUSH;
          end else if (wr_ok) begin
            if (csr_addr == CSR_EID_ADDR) eid   <= eid_t'(csr_wdata[EID_W-1:0]);
            else                          mtvec <= csr_wdata;
          end
        end
        S_FLUSH: begin
          if (l1_flush_done) begin
            eid     <= EID_SM;
            state_q <= S_RUN;
          end
        end
        default: state_q <= S_RUN;
      endcase
    end
  end

  always_comb begin
    unique case (csr_addr)
      CSR_EID_ADDR:   csr_rdata = 32'(eid);
      CSR_MTVEC_ADDR: csr_rdata = mtvec;
      default:        csr_rdata = '0;
    endcase
  end

  assign l1_flush_req = (state_q == S_FLUSH);
  assign trap_busy    = (state_q == S_FLUSH) || (trap_m && !sm_ctx);

  always_comb begin
    tagged_req     = core_req;
    tagged_req.eid = eid;
  end

  // The eid may only become 0xF through a permitted write or a completed flush.
  a_sm_entry: assert property (@(posedge clk) disable iff (!rst_n)
    (!sm_ctx ##1 sm_ctx) |-> $past(wr_ok || (state_q == S_FLUSH && l1_flush_done)));

endmodule
