// tb_simd_alu: checks the SIMD ALU array lane by lane against the float32
// reference, including the one-clock result latency and out_valid timing.
module tb_simd_alu;
  import netdam_pkg::*;
  import fp_ref_pkg::*;
  import netdam_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  alu_op_e op;
  beat_t a, b, y;

  simd_alu dut (.clk, .rst_n, .in_valid, .op, .a, .b, .out_valid, .y);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    beat_t exp;
    int o;
    in_valid = 0; op = ALU_ADD; a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < 600; t++) begin
      o = $urandom % 6;
      a = rnd_beat(); b = rnd_beat();
      op = alu_op_e'(o);
      in_valid = 1;
      exp = beat_op(o, a, b);
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid not one clock after in_valid"); end
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (y[32*l +: 32] !== exp[32*l +: 32]) begin
          failures++;
          if (failures < 10) $display("FAIL op %0d lane %0d got %h exp %h", o, l, y[32*l +: 32], exp[32*l +: 32]);
        end
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
