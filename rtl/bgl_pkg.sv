// bgl_pkg: types and constants shared by the node ASIC logic.
//
// Torus links move one byte per clock (the crossbar is byte-wide). In the
// forward direction a link carries a valid byte; in the reverse direction it
// carries the link-level acknowledge, negative acknowledge (CRC error) and
// token returns for the two virtual channels. A token stands for 32 bytes of
// buffer space, the packet granularity. Packets are 32..256 bytes; the first
// four bytes are the header:
//   byte0 = {size-1 [7:5], adaptive [4], deposit [3], vc [2], 2'b00}
//   byte1..3 = destination x, y, z
// The packet sizes and granularity are the paper's; the header layout, the
// sideband reverse channel and the tree flit format are choices of this design.
package bgl_pkg;

  localparam int NLINK    = 6;   // +x -x +y -y +z -z
  localparam int NVC      = 2;   // VC0 dynamic (adaptive), VC1 escape (deterministic)
  localparam int NINJ     = 7;   // injection FIFOs
  localparam int NREC     = NLINK * NVC;
  localparam int XBAR_IN  = NLINK * NVC + NINJ;  // 19
  localparam int CHUNK    = 32;  // packet granularity, bytes
  localparam int MAXPKT   = 256; // bytes

  typedef struct packed {
    logic       vld;
    logic [7:0] data;
  } link_fwd_t;

  typedef struct packed {
    logic           ack;
    logic           nak;
    logic [NVC-1:0] tok;   // one pulse = one 32-byte chunk freed on that VC
  } link_bwd_t;

  // everything that travels one way along a link: the forward byte of the
  // link going that way and the reverse signals of the link coming back
  typedef struct packed {
    link_fwd_t f;
    link_bwd_t b;
  } link_bundle_t;

  // header byte 0 fields
  function automatic int unsigned hdr_bytes(logic [7:0] b0);
    return (int'(b0[7:5]) + 1) * CHUNK;
  endfunction
  function automatic int unsigned hdr_chunks(logic [7:0] b0);
    return int'(b0[7:5]) + 1;
  endfunction

  // Global tree
  typedef enum logic [2:0] {
    TOP_ADD   = 3'd0,
    TOP_MAX   = 3'd1,
    TOP_AND   = 3'd2,
    TOP_OR    = 3'd3,
    TOP_XOR   = 3'd4,
    TOP_BCAST = 3'd5
  } tree_op_e;

  localparam int TW = 32;

  typedef struct packed {
    logic          vld;
    tree_op_e      op;
    logic [TW-1:0] data;
  } tree_flit_t;

  // Memory hierarchy
  localparam int LINE_BYTES = 32;
  localparam int LINE_BITS  = LINE_BYTES * 8;
  localparam int CPU_BITS   = 128;

endpackage
