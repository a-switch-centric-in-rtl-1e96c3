// scin_pkg: types and constants shared by the switch, its ports and the in-switch accelerator.
//
// Transport flits are 32 bytes wide (the prototype's flit size). A packet is one header flit
// followed by zero or more payload flits; the header is carried in the low bits of the header
// flit's payload. The 1-bit INC flag in the header marks packets that come from or go to the
// in-switch accelerator (ISA). The instruction layout follows the published 8-accelerator
// format: 2-byte ID, 8-byte Length, 8 x 48-bit addresses, 1-byte source and destination
// masks, a 1-bit QuantEnable and a 2-byte BlockSize. Header field widths, message encodings
// and the tag layout are this design's own choices.
package scin_pkg;

  localparam int FLIT_BYTES = 32;
  localparam int FLIT_W     = FLIT_BYTES * 8;
  localparam int ADDR_W     = 48;
  localparam int MAX_ACC    = 8;     // address slots in one instruction
  localparam int TAG_W      = 16;
  localparam int LEN_W      = 16;
  localparam int PORT_W     = 4;
  localparam int LANES      = 32;    // INT8 elements per flit = reduction lanes

  // memory-semantic message classes
  typedef enum logic [1:0] {
    MSG_RD_REQ = 2'd0,
    MSG_WR_REQ = 2'd1,
    MSG_RD_RSP = 2'd2,
    MSG_WR_RSP = 2'd3
  } msg_t;

  typedef struct packed {
    msg_t              typ;
    logic              inc;   // 1: packet originates from / is destined for the ISA
    logic [PORT_W-1:0] src;   // port the requester is attached to
    logic [PORT_W-1:0] dst;   // port the packet is routed to
    logic [TAG_W-1:0]  tag;
    logic [ADDR_W-1:0] addr;
    logic [LEN_W-1:0]  len;   // payload bytes (requested bytes for a read request)
  } hdr_t;

  localparam int HDR_W = $bits(hdr_t);

  typedef struct packed {
    logic              hdr;   // this flit is a header flit
    logic              last;  // last flit of the packet
    logic [FLIT_W-1:0] data;
  } flit_t;

  // ISA instruction (field order and widths as in the instruction-format figure)
  typedef struct packed {
    logic [15:0]                    id;
    logic [63:0]                    length;      // bytes per accelerator
    logic [MAX_ACC-1:0][ADDR_W-1:0] addr;        // per-accelerator source (= result) address
    logic [MAX_ACC-1:0]             src_mask;
    logic [MAX_ACC-1:0]             dst_mask;
    logic                           quant_en;
    logic [15:0]                    block_size;  // elements sharing one scale factor
  } instr_t;

  // wave-table entry state
  typedef enum logic [1:0] {
    WS_IDLE    = 2'd0,
    WS_WAITING = 2'd1,
    WS_READY   = 2'd2
  } wave_state_t;

  function automatic flit_t make_hdr_flit(hdr_t h, logic last);
    flit_t f;
    f.hdr  = 1'b1;
    f.last = last;
    f.data = '0;
    f.data[HDR_W-1:0] = h;
    return f;
  endfunction

  function automatic hdr_t flit_hdr(flit_t f);
    return hdr_t'(f.data[HDR_W-1:0]);
  endfunction

endpackage
