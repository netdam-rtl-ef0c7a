// simd_alu: the SIMD ALU array of the NetDAM device.
//
// LANES copies of fp32_alu work side by side on one data beat, so a single
// instruction is applied to a whole packet payload (up to ~2048 float32)
// beat after beat. All lanes run the same operation. The result is
// registered: y/out_valid appear one clock after in_valid/a/b/op.
// The lane count (16, one 512-bit beat) is this design's choice; the design
// only states that several ALUs act on the packet in parallel.
module simd_alu
  import netdam_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  alu_op_e           op,
  input  logic [32*N-1:0]   a,
  input  logic [32*N-1:0]   b,
  output logic              out_valid,
  output logic [32*N-1:0]   y
);

  logic [32*N-1:0] y_c;

  for (genvar i = 0; i < N; i++) begin : g_lane
    fp32_alu u_lane (
      .op (op),
      .a  (a[32*i +: 32]),
      .b  (b[32*i +: 32]),
      .y  (y_c[32*i +: 32])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= y_c;
    end
  end

endmodule
