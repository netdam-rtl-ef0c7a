// qp_queue: one queue of the host queue pair (QP memory).
//
// The host hands NetDAM packets to the device through a Request Queue and
// collects answers from a Complete Queue; both are instances of this FIFO of
// packet beats. Valid/ready on both sides: a beat moves when valid and ready
// are both high at a clock edge. out_valid rises the clock after the first
// push (no fall-through). DEPTH (default two full-size packets) is this
// design's choice. count gives the number of beats held.
module qp_queue
  import netdam_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  pkt_beat_t  in_beat,
  output logic       out_valid,
  input  logic       out_ready,
  output pkt_beat_t  out_beat,
  output logic [AW:0] count
);

  pkt_beat_t    mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_beat  = mem[rp];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_beat;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // a full queue never accepts, an empty one never delivers
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n)
                                   (count == (AW+1)'(DEPTH)) |-> !push);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   (count == '0) |-> !pop);

endmodule
