// gather_load_gen -- the Gather Load Generator of a router input port.
//
// For the flit at the head of an input VC it decides whether the payload
// waiting in this router's Gather Payload unit may be uploaded into the
// packet. Following the load-signal logic of the paper, load is the AND of
// four terms: the flit is a header (FT = H), the packet is a gather packet
// (PT = G), its ASpace is at least the payload size, and its destination
// equals the payload's destination. This design adds a fifth term, that a
// payload is actually waiting (pl_valid), so that an idle router never
// claims a slot.
//
// ASpace counts free 32-bit payload slots, so the payload size is one slot.
// The module also gives the decremented ASpace that the router writes back
// into the header, and the slot index the payload will occupy: slots are
// filled in order, so the next free slot is GATHER_SLOTS - ASpace.
//
// Purely combinational; the router samples it in the RC stage.
module gather_load_gen
  import noc_pkg::*;
#(
  parameter int unsigned PAYLOAD_SLOTS = 1   // sizeof(P) in slots
) (
  input  flit_t               flit,       // flit at the head of the VC
  input  logic                pl_valid,   // a payload is waiting to be uploaded
  input  coord_t              pl_dst,     // the payload's destination
  output logic                load,
  output logic [ASPACE_W-1:0] aspace_new, // ASpace after the upload
  output logic [ASPACE_W-1:0] slot        // slot index taken by the payload
);

  header_t hdr;
  logic    is_head, is_gather, has_space, dst_match;

  assign hdr       = header_t'(flit);
  assign is_head   = (hdr.ft == FT_HEAD);
  assign is_gather = (hdr.pt == PT_GATHER);
  assign has_space = (hdr.aspace >= ASPACE_W'(PAYLOAD_SLOTS));
  assign dst_match = (hdr.dst == pl_dst);

  assign load       = is_head && is_gather && has_space && dst_match && pl_valid;
  assign aspace_new = load ? hdr.aspace - ASPACE_W'(PAYLOAD_SLOTS) : hdr.aspace;
  assign slot       = ASPACE_W'(GATHER_SLOTS) - hdr.aspace;

endmodule
