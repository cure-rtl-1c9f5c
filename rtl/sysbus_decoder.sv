// sysbus_decoder: the system-bus decoder at a core's master port.
//
// Every request of the core is sent either to the memory arbiter or to the
// peripheral arbiter. An address whose top nibble equals MMIO_NIBBLE is MMIO
// (peripheral bus); everything else is main memory. The decoder allows one
// outstanding transaction: it remembers which side took the request and returns
// that side's response, and holds m_req_ready low until the response has been
// delivered.
//
// Timing: purely combinational forwarding plus one state bit per side; it adds
// no cycle to a transaction.
//
// Follows the design: the decoder sits in front of the two arbiters (the
// decoder boxes of the system-bus figure). Own choice: the address map and the
// single outstanding transaction.
//
// Reset note: rst_n is also read by the assertions' disable iff, which lint
// reports as a synchronous use of an asynchronous reset; the flops use it
// asynchronously only.
module sysbus_decoder
  import cure_pkg::*;
#(
  parameter logic [3:0] MMIO_NIBBLE = 4'h1
) (
  input  logic    clk,
  input  logic    rst_n,
  // master side
  input  logic    m_req_valid,
  output logic    m_req_ready,
  input  tl_req_t m_req,
  output logic    m_rsp_valid,
  input  logic    m_rsp_ready,
  output tl_rsp_t m_rsp,
  // memory arbiter side
  output logic    mem_req_valid,
  input  logic    mem_req_ready,
  output tl_req_t mem_req,
  input  logic    mem_rsp_valid,
  output logic    mem_rsp_ready,
  input  tl_rsp_t mem_rsp,
  // peripheral arbiter side
  output logic    per_req_valid,
  input  logic    per_req_ready,
  output tl_req_t per_req,
  input  logic    per_rsp_valid,
  output logic    per_rsp_ready,
  input  tl_rsp_t per_rsp
);

  typedef enum logic [1:0] {P_NONE, P_MEM, P_PER} pend_e;
  pend_e pend_q;

  wire to_mmio = (m_req.addr[ADDR_W-1 -: 4] == MMIO_NIBBLE);
  wire idle    = (pend_q == P_NONE);

  assign mem_req       = m_req;
  assign per_req       = m_req;
  assign mem_req_valid = idle && m_req_valid && !to_mmio;
  assign per_req_valid = idle && m_req_valid &&  to_mmio;
  assign m_req_ready   = idle && (to_mmio ? per_req_ready : mem_req_ready);

  assign m_rsp_valid   = (pend_q == P_MEM) ? mem_rsp_valid :
                         (pend_q == P_PER) ? per_rsp_valid : 1'b0;
  assign m_rsp         = (pend_q == P_PER) ? per_rsp : mem_rsp;
  assign mem_rsp_ready = (pend_q == P_MEM) && m_rsp_ready;
  assign per_rsp_ready = (pend_q == P_PER) && m_rsp_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pend_q <= P_NONE;
    else if (idle && m_req_valid && m_req_ready) pend_q <= to_mmio ? P_PER : P_MEM;
    else if (!idle && m_rsp_valid && m_rsp_ready) pend_q <= P_NONE;
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_req_valid && !m_req_ready && idle) |=> m_req_valid);

endmodule
