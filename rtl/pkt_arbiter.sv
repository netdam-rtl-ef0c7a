// pkt_arbiter: packet-level arbiter in front of the NetDAM engine.
//
// Merges the packet stream from the network port (input 0) and from the host
// Request Queue (input 1) into the single execution pipeline. The choice is
// made at a start of packet, round robin when both wait, and held until the
// end-of-packet beat has been accepted, so packets never interleave.
// out_from_host tells which source the current packet came from; it is
// stable for the whole packet. Arbitration policy is this design's choice.
module pkt_arbiter
  import netdam_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      net_valid,
  output logic      net_ready,
  input  pkt_beat_t net_beat,
  input  logic      host_valid,
  output logic      host_ready,
  input  pkt_beat_t host_beat,
  output logic      out_valid,
  input  logic      out_ready,
  output pkt_beat_t out_beat,
  output logic      out_from_host
);

  logic locked, sel, last;   // sel: 0 = network, 1 = host
  logic pick;

  // new choice when not locked: round robin, favouring the one not served last
  always_comb begin
    if (net_valid && host_valid) pick = ~last;
    else                         pick = host_valid;
  end

  logic cur;
  assign cur           = locked ? sel : pick;
  assign out_from_host = cur;
  assign out_valid     = cur ? host_valid : net_valid;
  assign out_beat      = cur ? host_beat  : net_beat;
  assign net_ready     = out_ready && !cur;
  assign host_ready    = out_ready &&  cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0; sel <= 1'b0; last <= 1'b1;
    end else if (out_valid && out_ready) begin
      if (out_beat.eop) begin
        locked <= 1'b0;
        last   <= cur;
      end else begin
        locked <= 1'b1;
        sel    <= cur;
      end
    end
  end

endmodule
