// sr_router: segment routing next-hop selection.
//
// A NetDAM packet carries a segment list naming the nodes it must visit;
// each node executes the instruction and forwards the packet to the next
// segment, which chains computations such as a ring reduce-scatter across
// nodes. The list uses the SRv6 convention (this design's choice): seg_left
// counts the segments still to visit and segs[seg_left-1] is the next one.
// Forwarding pops it: next_hop = segs[seg_left-1], seg_left decremented.
// A packet arriving with seg_left == 0 is at its last hop. seg_left above
// NSEG marks a malformed header (bad). Purely combinational.
module sr_router
  import netdam_pkg::*;
(
  input  netdam_hdr_t hdr_in,
  output logic        last_hop,   // no segment left: execute and finish here
  output logic        bad,        // seg_left out of range
  output logic [31:0] next_hop,   // node id to send the packet to
  output netdam_hdr_t hdr_out     // header with the segment popped
);

  logic [7:0] idx;

  always_comb begin
    hdr_out  = hdr_in;
    last_hop = (hdr_in.seg_left == 8'd0);
    bad      = (hdr_in.seg_left > 8'(NSEG));
    idx      = hdr_in.seg_left - 8'd1;
    next_hop = '0;
    if (!last_hop && !bad) begin
      next_hop         = hdr_in.segs[idx[$clog2(NSEG)-1:0]];
      hdr_out.seg_left = idx;
    end
  end

endmodule
