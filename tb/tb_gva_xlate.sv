// tb_gva_xlate: checks block-interleaved translation for random addresses:
// device index, node id, local address and the remote flag, and that every
// device receives an equal share of consecutive blocks.
module tb_gva_xlate;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [63:0] gva, la;
  logic [3:0][31:0] ids;
  logic [31:0] me, dst;
  logic [1:0] dev;
  logic rem;
  int hits [4];

  gva_xlate dut (.gva, .node_ids(ids), .my_node(me), .dev, .dst_node(dst), .remote(rem), .local_addr(la));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned g, b;
    int d;
    for (int i = 0; i < 4; i++) ids[i] = 32'hC0A8_0000 + 32'(17 * i + 3);
    me = ids[2];
    for (int t = 0; t < 4000; t++) begin
      g = (t < 400) ? longint'(t) * 8192 + 64 : {$urandom, $urandom} >> ($urandom % 40);
      gva = g;
      #1;
      b = g / 8192;
      d = int'(b % 4);
      if (t < 400) hits[d]++;
      checks++;
      if (dev != 2'(d) || dst != ids[d] || rem != (d != 2) ||
          la != (b / 4) * 8192 + g % 8192) begin
        failures++;
        if (failures < 10) $display("FAIL gva %h: dev %0d la %h", g, dev, la);
      end
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (hits[i] != 100) begin failures++; $display("FAIL uneven interleave"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
