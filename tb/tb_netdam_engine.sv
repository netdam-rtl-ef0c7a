// tb_netdam_engine: self-checking test of the NetDAM instruction engine.
// Drives packets into the engine, with a behavioural memory behind it, and
// checks every instruction against values computed here: WRITE/READ, the
// SIMD element operations, CAS hit and miss, MEMCOPY, BLOCK_HASH, the three
// roles of a reduce-scatter step (first node, intermediate, last node with
// hash check and duplicate drop), all-gather forwarding and ACK, response
// pass-through and an unknown opcode. READ latency must be the same on every
// repetition and equal to the engine's cycle formula (6 + beats + memory
// latency: reads are streamed one per clock).
module tb_netdam_engine;
  import netdam_pkg::*;
  import fp_ref_pkg::*;
  import netdam_tb_pkg::*;

  localparam int LAT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  logic in_valid, in_ready, in_from_host;
  pkt_beat_t in_beat;
  logic out_valid, out_ready, out_to_host;
  pkt_beat_t out_beat;
  logic [31:0] out_dst;
  logic mreq_v, mreq_r, mreq_we, mrsp_v;
  logic [24:0] mreq_a;
  logic [511:0] mreq_d, mrsp_d;
  logic [31:0] s_exec, s_fwd, s_drop, s_resp;

  netdam_engine dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_beat, .in_from_host,
    .out_valid, .out_ready, .out_beat, .out_to_host, .out_dst,
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_we(mreq_we),
    .mem_req_addr(mreq_a), .mem_req_wdata(mreq_d),
    .mem_rsp_valid(mrsp_v), .mem_rsp_rdata(mrsp_d),
    .stat_exec(s_exec), .stat_fwd(s_fwd), .stat_drop(s_drop), .stat_resp(s_resp)
  );

  hbm_model #(.AW(25), .DEPTH(1024), .LAT(LAT)) u_mem (
    .clk, .req_valid(mreq_v), .req_ready(mreq_r), .req_we(mreq_we), .req_addr(mreq_a),
    .req_wdata(mreq_d), .rsp_valid(mrsp_v), .rsp_rdata(mrsp_d)
  );

  // ------------------------------------------------------------ output monitor
  netdam_hdr_t rx_hdr;
  beat_t       rx_data[$];
  beat_t       cur_data[$];
  logic        rx_host;
  logic [31:0] rx_dst;
  int          rx_pkts = 0;
  longint      first_out_cyc = 0;
  bit          rand_ready = 0;

  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      if (out_beat.sop) begin
        rx_hdr = netdam_hdr_t'(out_beat.data);
        rx_host = out_to_host;
        rx_dst = out_dst;
        cur_data.delete();
        first_out_cyc = cyc;
      end else cur_data.push_back(out_beat.data);
      if (out_beat.eop) begin
        rx_data = cur_data;
        rx_pkts++;
      end
    end
    out_ready <= rand_ready ? ($urandom % 3 != 0) : 1'b1;
  end

  // ------------------------------------------------------------ driver
  longint hdr_acc_cyc;
  task automatic send(input netdam_hdr_t h, input beat_t d[$], input logic host);
    int n = d.size();
    for (int i = 0; i <= n; i++) begin
      in_valid <= 1'b1;
      in_from_host <= host;
      in_beat.sop <= (i == 0);
      in_beat.eop <= (i == n);
      in_beat.data <= (i == 0) ? beat_data_t'(h) : d[i-1];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (i == 0) hdr_acc_cyc = cyc;
    end
    in_valid <= 1'b0;
  endtask

  task automatic wait_pkt(input int n0);
    int t = 0;
    while (rx_pkts == n0 && t < 5000) begin @(posedge clk); t++; end
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic xact(input netdam_hdr_t h, input beat_t d[$], input logic host);
    int b = rx_pkts;
    send(h, d, host);
    wait_pkt(b);
    chk(rx_pkts == b + 1, $sformatf("response to opcode %h arrived", h.opcode));
  endtask

  // no-packet expected: give the engine time, see nothing came out
  task automatic xact_none(input netdam_hdr_t h, input beat_t d[$], input logic host);
    int b = rx_pkts;
    send(h, d, host);
    repeat (200) @(posedge clk);
    chk(rx_pkts == b, "no packet out");
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    netdam_hdr_t h;
    beat_t d[$], m[$], e, none[$];
    logic [31:0] crc;
    longint lat0;
    in_valid = 0; in_from_host = 0; in_beat = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ---- WRITE 3 beats (40 elements) at beat 8, from the host
    d.delete(); for (int i = 0; i < 3; i++) d.push_back(rnd_beat());
    h = mk_hdr(OP_WRITE, 1, 40, 64'd8 << 6, 32'h0A00_0001);
    xact(h, d, 1);
    chk(rx_hdr.opcode == (OP_WRITE | RESP_BIT) && rx_hdr.status == ST_OK && rx_host, "write ack");
    chk(rx_data.size() == 0 && rx_hdr.seq == 1, "write ack has no data");
    for (int i = 0; i < 3; i++) chk(u_mem.peek(8 + i) == d[i], $sformatf("write beat %0d", i));

    // ---- READ back, three times: fixed latency
    for (int r = 0; r < 3; r++) begin
      h = mk_hdr(OP_READ, 2, 40, 64'd8 << 6, 32'h0A00_0002);
      xact(h, none, 0);
      chk(rx_hdr.opcode == (OP_READ | RESP_BIT) && !rx_host && rx_dst == 32'h0A00_0002, "read resp to src");
      chk(rx_data.size() == 3, "read data beats");
      for (int i = 0; i < 3 && i < rx_data.size(); i++) chk(rx_data[i] == d[i], "read data");
      // header accepted -> response header out: a streaming read issues one
      // request per clock, so 6 fixed cycles + one per beat + memory latency
      if (r == 0) lat0 = first_out_cyc - hdr_acc_cyc;
      chk(first_out_cyc - hdr_acc_cyc == lat0, "read latency has no jitter");
      chk(lat0 == 6 + 3 + LAT, $sformatf("read latency %0d cycles", lat0));
    end

    // ---- one-beat read: same formula
    h = mk_hdr(OP_READ, 3, 16, 64'd8 << 6, 32'h0A00_0002);
    xact(h, none, 0);
    chk(first_out_cyc - hdr_acc_cyc == 6 + 1 + LAT, $sformatf("1-beat read latency %0d", first_out_cyc - hdr_acc_cyc));
    chk(rx_data.size() == 1 && rx_data[0] == d[0], "1-beat read data");

    // ---- the 32 x float32 read of the latency measurement (2 beats), ten times
    for (int r = 0; r < 10; r++) begin
      h = mk_hdr(OP_READ, 4, 32, 64'd8 << 6, 32'h0A00_0002);
      xact(h, none, 0);
      chk(first_out_cyc - hdr_acc_cyc == 6 + 2 + LAT, $sformatf("32-element read latency %0d", first_out_cyc - hdr_acc_cyc));
      chk(rx_data.size() == 2 && rx_data[0] == d[0] && rx_data[1] == d[1], "32-element read data");
    end

    // ---- SIMD element ops: memory = memory OP payload
    for (int op = 0; op < 6; op++) begin
      m.delete(); d.delete();
      for (int i = 0; i < 2; i++) begin
        m.push_back(rnd_beat()); d.push_back(rnd_beat());
        u_mem.poke(32 + i, m[i]);
      end
      h = mk_hdr(8'(OP_ADD) + 8'(op), 10 + op, 32, 64'd32 << 6, 32'h0A00_0003);
      xact(h, d, 1);
      chk(rx_hdr.opcode == ((8'(OP_ADD) + 8'(op)) | RESP_BIT), "simd ack");
      for (int i = 0; i < 2; i++)
        chk(u_mem.peek(32 + i) == beat_op(op, m[i], d[i]), $sformatf("simd op %0d beat %0d", op, i));
    end

    // ---- CAS hit, then miss
    e = rnd_beat(); e[31:0] = 32'h1111_1111; u_mem.poke(40, e);
    d.delete(); d.push_back('0); d[0][31:0] = 32'h1111_1111; d[0][63:32] = 32'h2222_2222;
    h = mk_hdr(OP_CAS, 20, 1, 64'd40 << 6, 1);
    xact(h, d, 1);
    chk(rx_hdr.status == ST_OK && rx_data.size() == 1 && rx_data[0] == e, "cas hit returns old");
    chk(u_mem.peek(40) == {e[511:32], 32'h2222_2222}, "cas hit swapped");
    xact(h, d, 1);
    chk(rx_hdr.status == ST_CAS_FAIL, "cas miss status");
    chk(u_mem.peek(40) == {e[511:32], 32'h2222_2222}, "cas miss leaves memory");

    // ---- MEMCOPY 2 beats from 8 to 100
    d.delete(); d.push_back(512'(64'd100 << 6));
    h = mk_hdr(OP_MEMCOPY, 21, 32, 64'd8 << 6, 1);
    xact(h, d, 1);
    for (int i = 0; i < 2; i++) chk(u_mem.peek(100 + i) == u_mem.peek(8 + i), "memcopy");

    // ---- BLOCK_HASH over 3 beats at 8
    crc = '1; for (int i = 0; i < 3; i++) crc = crc_ref(crc, u_mem.peek(8 + i));
    h = mk_hdr(OP_BLOCK_HASH, 22, 48, 64'd8 << 6, 1);
    xact(h, none, 1);
    chk(rx_hdr.hash == crc, $sformatf("block hash %h vs %h", rx_hdr.hash, crc));

    // ---- REDUCE-SCATTER, first node (from host): load + forward
    m.delete(); for (int i = 0; i < 2; i++) begin m.push_back(rnd_beat()); u_mem.poke(200 + i, m[i]); end
    h = mk_hdr(OP_RSCATTER, 30, 32, 64'd200 << 6, 32'hC0);
    h.seg_left = 3; h.segs[0] = 32'hD4; h.segs[1] = 32'hD3; h.segs[2] = 32'hD2;
    xact(h, none, 1);
    chk(!rx_host && rx_dst == 32'hD2 && rx_hdr.seg_left == 2 && rx_hdr.opcode == OP_RSCATTER,
        "rs first hop forwarded to next segment");
    chk(rx_data.size() == 2 && rx_data[0] == m[0] && rx_data[1] == m[1], "rs first hop carries local block");

    // ---- REDUCE-SCATTER, intermediate node: payload += local, memory untouched
    d.delete(); for (int i = 0; i < 2; i++) d.push_back(rnd_beat());
    h.seg_left = 2;
    xact(h, d, 0);
    chk(rx_dst == 32'hD3 && rx_hdr.seg_left == 1, "rs intermediate next hop");
    for (int i = 0; i < 2 && i < rx_data.size(); i++) begin
      chk(rx_data[i] == beat_op(0, m[i], d[i]), "rs intermediate sum");
      chk(u_mem.peek(200 + i) == m[i], "rs intermediate leaves memory");
    end

    // ---- REDUCE-SCATTER, last node: hash matches -> commit + ACK
    crc = '1; for (int i = 0; i < 2; i++) crc = crc_ref(crc, m[i]);
    h.seg_left = 0; h.hash = crc;
    xact(h, d, 0);
    chk(rx_hdr.opcode == (OP_RSCATTER | RESP_BIT) && rx_dst == 32'hC0, "rs last hop ack to controller");
    for (int i = 0; i < 2; i++) chk(u_mem.peek(200 + i) == beat_op(0, m[i], d[i]), "rs last hop commit");
    // retransmission: hash no longer matches -> dropped, memory unchanged
    xact_none(h, d, 0);
    chk(s_drop == 1, "rs duplicate dropped");
    for (int i = 0; i < 2; i++) chk(u_mem.peek(200 + i) == beat_op(0, m[i], d[i]), "rs duplicate idempotent");

    // ---- ALL-GATHER intermediate: write + forward; last: write + ACK
    d.delete(); for (int i = 0; i < 2; i++) d.push_back(rnd_beat());
    h = mk_hdr(OP_AGATHER, 40, 32, 64'd300 << 6, 32'hC0);
    h.seg_left = 1; h.segs[0] = 32'hD4;
    xact(h, d, 0);
    chk(rx_dst == 32'hD4 && rx_hdr.seg_left == 0 && rx_data.size() == 2 && rx_data[1] == d[1], "ag forwarded");
    for (int i = 0; i < 2; i++) chk(u_mem.peek(300 + i) == d[i], "ag intermediate write");
    h.seg_left = 0; h.addr = 64'd310 << 6;
    xact(h, d, 0);
    chk(rx_hdr.opcode == (OP_AGATHER | RESP_BIT) && rx_dst == 32'hC0, "ag last ack");
    for (int i = 0; i < 2; i++) chk(u_mem.peek(310 + i) == d[i], "ag last write");

    // ---- a response arriving from the network goes to the host unchanged
    h = mk_hdr(OP_READ | RESP_BIT, 50, 16, 0, 1);
    d.delete(); d.push_back(rnd_beat());
    xact(h, d, 0);
    chk(rx_host && rx_hdr.seq == 50 && rx_data.size() == 1 && rx_data[0] == d[0], "response to host");

    // ---- unknown (user-defined, not implemented) opcode
    h = mk_hdr(8'h45, 51, 0, 0, 1);
    xact(h, none, 1);
    chk(rx_hdr.status == ST_BAD_OP, "bad opcode status");

    // ---- random output back-pressure: long read
    rand_ready = 1;
    for (int i = 0; i < 8; i++) u_mem.poke(500 + i, rnd_beat());
    h = mk_hdr(OP_READ, 60, 128, 64'd500 << 6, 1);
    xact(h, none, 1);
    chk(rx_data.size() == 8, "long read beats");
    for (int i = 0; i < 8 && i < rx_data.size(); i++) chk(rx_data[i] == u_mem.peek(500 + i), "long read data");

    chk(s_fwd == 3, "forward count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
