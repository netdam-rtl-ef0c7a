// tb_qp_queue: pushes random beats with random valid/ready patterns and
// checks order, full/empty behaviour (count, in_ready, out_valid) against a
// queue kept here; a small DEPTH makes the full case frequent.
module tb_qp_queue;
  import netdam_pkg::*;

  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, ov, ordy;
  pkt_beat_t ib, ob;
  logic [3:0] cnt;
  pkt_beat_t model[$];
  int fulls = 0;

  qp_queue #(.DEPTH(D)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_beat(ib),
                             .out_valid(ov), .out_ready(ordy), .out_beat(ob), .count(cnt));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; ordy = 0; ib = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      iv = ($urandom % 3) != 0;
      ordy = (t % 1000 < 500) ? ($urandom % 3 == 0) : ($urandom % 3 != 0);
      ib.sop = $urandom; ib.eop = $urandom; ib.data = {16{$urandom}};
      #1;
      checks++;
      if (cnt != 4'(model.size()) || ir != (model.size() < D) || ov != (model.size() > 0)) begin
        failures++; if (failures < 10) $display("FAIL flags cnt=%0d model=%0d", cnt, model.size());
      end
      if (model.size() == D) fulls++;
      if (ov && ordy) begin
        checks++;
        if (ob !== model[0]) begin failures++; if (failures < 10) $display("FAIL data order"); end
      end
      @(posedge clk);
      if (ov && ordy) void'(model.pop_front());
      if (iv && ir) model.push_back(ib);
      #1;
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL queue never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
