// cure_pkg: types and constants shared by the enclave-ID security primitives.
//
// Every bus master-to-slave transaction carries a 4-bit enclave ID (eid). Three
// IDs are reserved: 0 for the untrusted OS, 0xE for the machine-mode firmware and
// 0xF for the security monitor (SM); the 13 IDs in between name enclaves.
//
// The bus is a reduced TileLink: one request struct carries what TileLink puts on
// its A channel (Get, PutFullData/PutPartialData) and on its C channel
// (ReleaseData, the write-back of a dirty L1 line). Both directions that carry
// data from a master to a slave therefore carry the eid, as in the design; the
// B, D and E channels carry none, and only D (the response) is modelled. Each
// link is a valid/ready handshake for the request and a valid/ready handshake
// for the response, with one transaction outstanding per link. The reduction of
// TileLink and the field widths other than the eid are this implementation's own.
package cure_pkg;

  localparam int EID_W  = 4;
  localparam int ADDR_W = 32;
  localparam int DATA_W = 64;
  localparam int SRC_W  = 2;

  typedef logic [EID_W-1:0]  eid_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;

  localparam eid_t EID_OS = 4'h0;
  localparam eid_t EID_FW = 4'hE;
  localparam eid_t EID_SM = 4'hF;

  typedef enum logic [1:0] {
    OP_GET          = 2'd0,  // channel A, read
    OP_PUT          = 2'd1,  // channel A, write with byte mask
    OP_RELEASE_DATA = 2'd2   // channel C, dirty-line write-back
  } tl_op_e;

  typedef struct packed {
    tl_op_e                op;
    addr_t                 addr;
    data_t                 data;
    logic [DATA_W/8-1:0]   mask;
    eid_t                  eid;
    logic [SRC_W-1:0]      source;
  } tl_req_t;

  typedef struct packed {
    data_t                 data;
    logic [SRC_W-1:0]      source;
  } tl_rsp_t;

  function automatic logic is_write(tl_op_e op);
    return op != OP_GET;
  endfunction

  // Addr/Mask region register as used by all access-control points: a region
  // matches an address when the masked bits agree. A mask of zero marks an
  // unused register.
  function automatic logic region_hit(addr_t a, addr_t base, addr_t mask);
    return (mask != '0) && ((a & mask) == (base & mask));
  endfunction

  // Configuration port of a security primitive, driven by the control bus.
  localparam int CFG_IDX_W = 6;

endpackage
