// tb_pkt_buffer: writes random beats to random addresses of the packet
// buffer, keeps a copy here, and checks reads (one-clock latency, output
// held while re is low, read-before-write on the same address).
module tb_pkt_buffer;
  import netdam_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re;
  logic [6:0] wa, ra;
  beat_t wd, rd;
  beat_t shadow [128];

  pkt_buffer dut (.clk, .we, .waddr(wa), .wdata(wd), .re, .raddr(ra), .rdata(rd));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    beat_t exp;
    we = 0; re = 0; wa = 0; ra = 0; wd = '0;
    for (int i = 0; i < 128; i++) begin
      we = 1; wa = 7'(i); wd = rnd_beat(); shadow[i] = wd;
      @(posedge clk); #1;
    end
    we = 0;
    for (int t = 0; t < 3000; t++) begin
      re = 1; ra = 7'($urandom);
      we = $urandom % 2; wa = ($urandom % 4 == 0) ? ra : 7'($urandom); wd = rnd_beat();
      exp = shadow[ra];
      @(posedge clk); #1;
      if (we) shadow[wa] = wd;
      checks++;
      if (rd !== exp) begin failures++; if (failures < 10) $display("FAIL read %0d", ra); end
      re = 0; we = 0; ra = 7'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rd !== exp) begin failures++; if (failures < 10) $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
