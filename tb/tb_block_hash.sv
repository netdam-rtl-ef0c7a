// tb_block_hash: checks the block hash against a bit-serial CRC-32 computed
// here, for blocks of random length, with idle cycles between beats and a
// clear between blocks; the hash must be ready one clock after the last beat.
module tb_block_hash;
  import netdam_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, en;
  beat_t data;
  logic [31:0] crc;

  block_hash dut (.clk, .rst_n, .clear, .en, .data, .crc);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    clear = 0; en = 0; data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // known value: one all-zero beat
    #1 clear = 1; @(posedge clk); #1 clear = 0;
    r = crc_ref('1, '0);
    en = 1; data = '0; @(posedge clk); #1 en = 0;
    checks++;
    if (crc !== r) begin failures++; $display("FAIL zero beat %h vs %h", crc, r); end
    for (int blk = 0; blk < 40; blk++) begin
      clear = 1; @(posedge clk); #1 clear = 0;
      checks++;
      if (crc !== 32'hFFFF_FFFF) begin failures++; $display("FAIL clear"); end
      r = '1;
      for (int i = 0; i < 1 + $urandom % 9; i++) begin
        data = {16{$urandom}};
        en = 1;
        r = crc_ref(r, data);
        @(posedge clk); #1;
        en = 0;
        data = ~data;                    // ignored while en is low
        if ($urandom % 2) @(posedge clk); #1;
      end
      checks++;
      if (crc !== r) begin failures++; $display("FAIL block %0d: %h vs %h", blk, crc, r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
