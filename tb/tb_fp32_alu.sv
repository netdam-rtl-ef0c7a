// tb_fp32_alu: self-checking test of one float32 ALU lane.
// Random operands for every operation against the fp_ref_pkg reference,
// plus directed special cases (zeros, infinities, NaN, cancellation, ties).
module tb_fp32_alu;
  import netdam_pkg::*;
  import fp_ref_pkg::*;

  alu_op_e     op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fp32_alu dut (.op(op), .a(a), .b(b), .y(y));

  task automatic chk(input alu_op_e o, input logic [31:0] x, input logic [31:0] z,
                     input logic [31:0] exp);
    op = o; a = x; b = z;
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL op=%0d a=%h b=%h got=%h exp=%h", o, x, z, y, exp);
    end
  endtask

  function automatic logic [31:0] ref_op(input alu_op_e o, input logic [31:0] x,
                                         input logic [31:0] z);
    real rx, rz;
    rx = f2r(x); rz = f2r(z);
    case (o)
      ALU_ADD: return r2f(rx + rz);
      ALU_SUB: return r2f(rx - rz);
      ALU_MUL: return r2f(rx * rz);
      ALU_XOR: return x ^ z;
      ALU_MIN: return (rx < rz) ? x : z;
      ALU_MAX: return (rx < rz) ? z : x;
      default: return z;
    endcase
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x, z;
    alu_op_e o;
    // directed cases
    chk(ALU_ADD, 32'h3F80_0000, 32'h3F80_0000, 32'h4000_0000); // 1+1=2
    chk(ALU_ADD, 32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000); // 1-1=+0
    chk(ALU_SUB, 32'h4040_0000, 32'h3F80_0000, 32'h4000_0000); // 3-1=2
    chk(ALU_MUL, 32'h4040_0000, 32'hC000_0000, 32'hC0C0_0000); // 3*-2=-6
    chk(ALU_ADD, 32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000); // 1+2^-24: tie -> even
    chk(ALU_ADD, 32'h3F80_0001, 32'h3380_0000, 32'h3F80_0002); // tie -> even (up)
    chk(ALU_ADD, 32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000); // inf-inf
    chk(ALU_MUL, 32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000); // inf*0
    chk(ALU_ADD, 32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000); // overflow
    chk(ALU_MUL, 32'h0080_0000, 32'h3F00_0000, 32'h0000_0000); // underflow flush
    chk(ALU_ADD, 32'h7FC0_1234, 32'h3F80_0000, 32'h7FC0_0000); // NaN
    chk(ALU_MIN, 32'h8000_0000, 32'h0000_0000, 32'h8000_0000); // -0 < +0
    chk(ALU_MAX, 32'hC000_0000, 32'h3F80_0000, 32'h3F80_0000);
    chk(ALU_ADD, 32'h0000_0000, 32'h4120_0000, 32'h4120_0000); // 0+10
    chk(ALU_PASS_B, 32'h1234_5678, 32'hCAFE_BABE, 32'hCAFE_BABE);
    // random
    for (int i = 0; i < 20000; i++) begin
      o = alu_op_e'($urandom % 6);
      x = rnd_f();
      z = rnd_f();
      if (i % 4 == 0) z[30:23] = x[30:23];           // near cancellation
      if (i % 8 == 1) z[30:23] = x[30:23] - 8'd1;
      chk(o, x, z, ref_op(o, x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
