// gather_load_gen: the Gather Load Generator of a router input virtual channel.
//
// Looks at the flit at the head of an input buffer. When it is the head flit
// of a gather packet (FT = H, PT = G) whose destination equals the
// destination of the payload waiting in this router, and the packet still has
// at least sizeof(P) free payload slots (ASpace >= size), it raises load and
// gives the header's new ASpace (ASpace - size). When the same header has too
// little space left it raises full instead, which tells the gather payload
// block to start its own gather packet. Purely combinational; the router
// registers the results in its route-computation stage.
//
// From the paper: the four conditions of the Load signal (Algorithm 1 and its
// logic diagram: flit type H, packet type G, ASpace >= size of payload,
// header Dst = payload destination) and the ASpace decrement. Own choices: the
// "full" output, and the pl_valid input so that a router with no payload
// never loads.
module gather_load_gen
  import noc_pkg::*;
(
  input  logic                flit_valid,  // a flit is at the head of the buffer
  input  ft_e                 flit_ft,
  input  logic [FLIT_W-1:0]   flit_data,
  input  logic                pl_valid,    // a gather payload is waiting here
  input  coord_t              pl_dst,      // its destination
  input  logic [ASPACE_W-1:0] pl_size,      // its size in payload slots
  output logic                load,
  output logic                full,
  output logic [ASPACE_W-1:0] aspace_new
);
  hdr_t hdr;
  logic is_gather_head, dst_match, space_ok;

  always_comb begin
    hdr            = hdr_t'(flit_data);
    is_gather_head = flit_valid && (flit_ft == FT_HEAD) && (hdr.pt == PT_GATHER);
    dst_match      = (hdr.dst == pl_dst);
    space_ok       = (hdr.aspace >= pl_size);
    load           = is_gather_head && space_ok && dst_match && pl_valid;
    full           = is_gather_head && !space_ok && dst_match && pl_valid;
    aspace_new     = load ? hdr.aspace - pl_size : hdr.aspace;
  end
endmodule
