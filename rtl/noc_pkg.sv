// noc_pkg: types and constants shared by the mesh NoC accelerator.
//
// A flit on a link carries a 128-bit data word plus sideband bits: a valid
// bit, the flit type (head/body/tail) and the virtual-channel number. The
// head flit's data word holds the header fields PT (packet type), ASpace
// (free gather payload slots), Src, Dst, MDst (multicast bit string) and a
// reserved field. Body and tail flits carry four 32-bit payload slots.
//
// From the paper: 128-bit flits, 32-bit gather payloads, 2 virtual channels,
// 4-flit buffers, the header field list and order. This design's own
// choices: flit type sent as sideband next to the 128 data bits (so four
// 32-bit payloads fit in one body flit, which is what the 3/5/9/17-flit
// gather packet sizes need), the field widths, and coordinates that allow
// x = COLS to name the global buffer on the east edge.
package noc_pkg;

  localparam int unsigned FLIT_W    = 128;  // data bits per flit
  localparam int unsigned PAYLOAD_W = 32;   // one gather payload (partial sum)
  localparam int unsigned SLOTS     = FLIT_W / PAYLOAD_W; // payload slots per body flit
  localparam int unsigned NUM_VC    = 2;
  localparam int unsigned VC_W      = 1;
  localparam int unsigned COORD_W   = 5;    // x and y, each up to 31
  localparam int unsigned ASPACE_W  = 8;
  localparam int unsigned MDST_W    = 64;   // one bit per node of an 8x8 mesh
  localparam int unsigned NPORTS    = 5;
  localparam int unsigned RSV_W     = FLIT_W - 2 - ASPACE_W - 4*COORD_W - MDST_W;

  // router port numbering
  localparam int unsigned P_N = 0;
  localparam int unsigned P_E = 1;
  localparam int unsigned P_S = 2;
  localparam int unsigned P_W = 3;
  localparam int unsigned P_L = 4;

  typedef enum logic [1:0] {
    FT_HEAD = 2'd0,
    FT_BODY = 2'd1,
    FT_TAIL = 2'd2
  } ft_e;

  typedef enum logic [1:0] {
    PT_UNICAST   = 2'd0,
    PT_MULTICAST = 2'd1,
    PT_GATHER    = 2'd2
  } pt_e;

  typedef struct packed {
    logic [COORD_W-1:0] y;   // row
    logic [COORD_W-1:0] x;   // column
  } coord_t;

  typedef struct packed {
    pt_e                 pt;
    logic [ASPACE_W-1:0] aspace;
    coord_t              src;
    coord_t              dst;
    logic [MDST_W-1:0]   mdst;
    logic [RSV_W-1:0]    rsv;
  } hdr_t;

  typedef struct packed {
    logic              valid;
    ft_e               ft;
    logic [VC_W-1:0]   vc;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // entry stored in a router input buffer
  typedef struct packed {
    ft_e               ft;
    logic [FLIT_W-1:0] data;
  } buf_entry_t;

endpackage
