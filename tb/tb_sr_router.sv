// tb_sr_router: checks next-hop selection, the segment pop, last-hop and
// malformed-header detection for every seg_left value of random headers.
module tb_sr_router;
  import netdam_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  netdam_hdr_t hi, ho;
  logic last, bad;
  logic [31:0] nh;

  sr_router dut (.hdr_in(hi), .last_hop(last), .bad(bad), .next_hop(nh), .hdr_out(ho));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    netdam_hdr_t e;
    for (int t = 0; t < 50; t++) begin
      for (int sl = 0; sl <= NSEG + 2; sl++) begin
        for (int i = 0; i < 16; i++) hi[32*i +: 32] = $urandom;
        hi.seg_left = 8'(sl);
        #1;
        chk(last == (sl == 0), $sformatf("last_hop seg_left=%0d", sl));
        chk(bad == (sl > NSEG), $sformatf("bad seg_left=%0d", sl));
        if (sl >= 1 && sl <= NSEG) begin
          chk(nh == hi.segs[sl - 1], $sformatf("next hop seg_left=%0d", sl));
          e = hi; e.seg_left = 8'(sl - 1);
          chk(ho == e, "segment popped, rest unchanged");
        end else begin
          chk(ho == hi, "header unchanged");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
