// pkt_buffer: packet buffer SRAM of the NetDAM device.
//
// Holds the data beats of the packet being executed. Incoming payload is
// written here, the ALU results of a reduce-scatter replace it in place (so
// intermediate nodes never touch their own memory), and the packet is sent
// on from here. Simple dual port: one write port, one read port with a
// registered output (rdata is mem[raddr] one clock after re), the shape of
// an FPGA block RAM. Default size: one 2048 x float32 packet (128 x 512 bit).
module pkt_buffer #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned W     = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
