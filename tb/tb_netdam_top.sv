// tb_netdam_top: end-to-end test of four NetDAM devices running a ring
// allreduce, at the top's default parameters.
//
// Four netdam_top instances, each with its own behavioural memory (with
// random back-pressure), are joined by a behavioural switch that delivers
// every transmitted packet to the device whose node id is its next hop.
// Node 0's host acts as the controller. Each node holds NCHUNK chunks of
// CHUNK float32 values (2048 = one full-size packet). The test:
//   1. BLOCK-HASH of chunk j on node j through each host's Request Queue,
//      checked against a CRC computed here;
//   2. all NCHUNK reduce-scatter chains at once (each host also queues a
//      second, long request so that host and network packets compete): chunk j starts on node j+1
//      (first hop loads it from memory) and travels j+2, j+3 to node j, each
//      hop adding its own chunk in the packet buffer, the last one committing
//      the sum after the hash check. The switch duplicates the first packet
//      that reaches a last hop, to stand for a retransmission, which must be
//      dropped;
//   3. all-gather: node j sends the reduced chunk j around the ring;
//   4. memory-pool mode: node 0's host writes and reads eight blocks by
//      global address, which must land block-interleaved on the devices;
// then compares every chunk of every node with a sum computed here in the
// same order, and checks that each mechanism (segment forwarding, in-buffer
// reduction, hash commit, duplicate drop, ACKs through the network into the
// controller's Complete Queue, network/host arbitration contention, pool
// requests routed to other devices, memory
// and output back-pressure) happened at least once.
module tb_netdam_top;
  import netdam_pkg::*;
  import fp_ref_pkg::*;
  import netdam_tb_pkg::*;

  localparam int NN     = 4;                 // devices in the ring
  localparam int CHUNK  = MAX_ELEMS;         // elements per chunk / packet
  localparam int CB     = CHUNK / LANES;     // beats per chunk
  localparam int NCHUNK = NN;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  function automatic logic [31:0] node_id(input int n);
    return 32'h0A00_0001 + 32'(n % NN);
  endfunction

  logic        rx_v [NN], rx_r [NN], tx_v [NN], tx_r [NN];
  pkt_beat_t   rx_b [NN], tx_b [NN];
  logic [31:0] tx_d [NN];
  logic        rq_v [NN], rq_r [NN], cq_v [NN], cq_r [NN];
  pkt_beat_t   rq_b [NN], cq_b [NN];
  logic        mv [NN], mr [NN], mwe [NN], mrv [NN];
  logic [24:0] ma [NN];
  logic [511:0] md [NN], mrd [NN];
  logic [31:0] s_exec [NN], s_fwd [NN], s_drop [NN], s_resp [NN];
  logic        pool_m = 1'b0;
  logic [NN-1:0][31:0] pool_ids;
  for (genvar n = 0; n < NN; n++) begin : g_ids
    assign pool_ids[n] = node_id(n);
  end

  for (genvar n = 0; n < NN; n++) begin : g_node
    netdam_top u_dut (
      .clk, .rst_n,
      .my_node(node_id(n)), .pool_mode(pool_m), .pool_nodes(pool_ids),
      .net_rx_valid(rx_v[n]), .net_rx_ready(rx_r[n]), .net_rx_beat(rx_b[n]),
      .net_tx_valid(tx_v[n]), .net_tx_ready(tx_r[n]), .net_tx_beat(tx_b[n]), .net_tx_dst(tx_d[n]),
      .host_rq_valid(rq_v[n]), .host_rq_ready(rq_r[n]), .host_rq_beat(rq_b[n]),
      .host_cq_valid(cq_v[n]), .host_cq_ready(cq_r[n]), .host_cq_beat(cq_b[n]),
      .mem_req_valid(mv[n]), .mem_req_ready(mr[n]), .mem_req_we(mwe[n]), .mem_req_addr(ma[n]),
      .mem_req_wdata(md[n]), .mem_rsp_valid(mrv[n]), .mem_rsp_rdata(mrd[n]),
      .stat_exec(s_exec[n]), .stat_fwd(s_fwd[n]), .stat_drop(s_drop[n]), .stat_resp(s_resp[n]),
      .rq_level(), .cq_level()
    );
    hbm_model #(.AW(25), .DEPTH(NCHUNK * CB), .LAT(6), .STALL(1'b1)) u_mem (
      .clk, .req_valid(mv[n]), .req_ready(mr[n]), .req_we(mwe[n]), .req_addr(ma[n]),
      .req_wdata(md[n]), .rsp_valid(mrv[n]), .rsp_rdata(mrd[n])
    );
    // network and host packets waiting for the engine in the same cycle
    always @(posedge clk) if (u_dut.u_arb.net_valid && u_dut.u_arb.host_valid) n_contend++;
    // pool requests sent by this device's host to another device
    always @(posedge clk) if (tx_v[n] && tx_r[n] && tx_b[n].sop && u_dut.u_txarb.out_from_host) n_pool_remote++;
  end

  // backdoor access to the memory of node n
  function automatic beat_t mpeek(input int n, input int a);
    case (n)
      0: return g_node[0].u_mem.peek(a);
      1: return g_node[1].u_mem.peek(a);
      2: return g_node[2].u_mem.peek(a);
      default: return g_node[3].u_mem.peek(a);
    endcase
  endfunction
  task automatic mpoke(input int n, input int a, input beat_t d);
    case (n)
      0: g_node[0].u_mem.poke(a, d);
      1: g_node[1].u_mem.poke(a, d);
      2: g_node[2].u_mem.poke(a, d);
      default: g_node[3].u_mem.poke(a, d);
    endcase
  endtask

  // ------------------------------------------------------------ switch model
  pkt_beat_t sw_q [NN][$];     // beats waiting for each destination port
  pkt_beat_t sw_cur [NN][$];   // packet being received from each source
  int        sw_dst [NN];
  int        dup_done = 0;
  int        n_tx_stall = 0;
  int        n_contend = 0;
  int        n_pool_remote = 0;

  for (genvar n = 0; n < NN; n++) begin : g_sw
    always @(posedge clk) begin
      netdam_hdr_t h;
      // from device n
      if (rst_n && tx_v[n] && tx_r[n]) begin
        if (tx_b[n].sop) begin
          sw_cur[n].delete();
          sw_dst[n] = int'(tx_d[n] - 32'h0A00_0001);
        end
        sw_cur[n].push_back(tx_b[n]);
        if (tx_b[n].eop) begin
          if (sw_dst[n] < 0 || sw_dst[n] >= NN) begin
            failures++; $display("FAIL switch: unknown destination %h", tx_d[n]);
          end else begin
            foreach (sw_cur[n][i]) sw_q[sw_dst[n]].push_back(sw_cur[n][i]);
            h = netdam_hdr_t'(sw_cur[n][0].data);
            // first reduce-scatter packet to a last hop is delivered twice
            if (h.opcode == OP_RSCATTER && h.seg_left == 0 && dup_done == 0) begin
              foreach (sw_cur[n][i]) sw_q[sw_dst[n]].push_back(sw_cur[n][i]);
              dup_done = 1;
            end
          end
        end
      end
      if (tx_v[n] && !tx_r[n]) n_tx_stall++;
      tx_r[n] <= ($urandom % 5) != 0;
      // to device n
      if (rx_v[n] && rx_r[n]) void'(sw_q[n].pop_front());
      rx_v[n] <= sw_q[n].size() > 0;
      if (sw_q[n].size() > 0) rx_b[n] <= sw_q[n][0];
    end
  end

  // ------------------------------------------------------------ host models
  pkt_beat_t   hq [NN][$];          // beats the host still has to write into its RQ
  netdam_hdr_t cq_hdr [NN][$];      // headers of completions read by the host
  beat_t       cq_dat [NN][int];    // last data beat of each completion, by seq
  int          cq_seq [NN];
  int          n_mem_stall = 0;

  for (genvar n = 0; n < NN; n++) begin : g_host
    always @(posedge clk) begin
      netdam_hdr_t ch;
      if (rq_v[n] && rq_r[n]) void'(hq[n].pop_front());
      rq_v[n] <= hq[n].size() > 0;
      if (hq[n].size() > 0) rq_b[n] <= hq[n][0];
      if (rst_n && cq_v[n] && cq_r[n] && cq_b[n].sop) begin
        ch = netdam_hdr_t'(cq_b[n].data);
        cq_hdr[n].push_back(ch);
        cq_seq[n] = int'(ch.seq);
      end
      if (rst_n && cq_v[n] && cq_r[n] && !cq_b[n].sop) cq_dat[n][cq_seq[n]] = cq_b[n].data;
      cq_r[n] <= ($urandom % 4) != 0;
      if (mv[n] && !mr[n]) n_mem_stall++;
    end
  end

  task automatic post(input int n, input netdam_hdr_t h);
    hq[n].push_back('{sop: 1'b1, eop: 1'b1, data: beat_data_t'(h)});
  endtask

  task automatic wait_cq(input int n, input int cnt);
    int t = 0;
    while (cq_hdr[n].size() < cnt && t < 400000) begin @(posedge clk); t++; end
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ test
  beat_t       init [NN][NCHUNK][CB];
  beat_t       red  [NCHUNK][CB];
  logic [31:0] hsh  [NCHUNK];
  beat_t       pw   [8];

  initial begin
    netdam_hdr_t h;
    logic [31:0] crc;
    longint t0, t_rs, t_ag;
    int acks;
    #1 rst_n = 0;            // a real falling edge for the asynchronous resets
    for (int n = 0; n < NN; n++) begin
      rx_v[n] = 0; rx_b[n] = '0; tx_r[n] = 1; rq_v[n] = 0; rq_b[n] = '0; cq_r[n] = 1;
    end
    // data and reference
    for (int n = 0; n < NN; n++)
      for (int c = 0; c < NCHUNK; c++)
        for (int b = 0; b < CB; b++) begin
          init[n][c][b] = rnd_beat();
          mpoke(n, c * CB + b, init[n][c][b]);
        end
    for (int c = 0; c < NCHUNK; c++)
      for (int b = 0; b < CB; b++) begin
        red[c][b] = init[(c + 1) % NN][c][b];
        for (int k = 2; k <= NN; k++) red[c][b] = beat_op(0, red[c][b], init[(c + k) % NN][c][b]);
      end
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // 1. block hash of chunk c on its last node c
    for (int c = 0; c < NCHUNK; c++) begin
      h = mk_hdr(OP_BLOCK_HASH, 100 + c, 16'(CHUNK), 64'(c * CB) << 6, node_id(0));
      post(c % NN, h);
    end
    for (int c = 0; c < NCHUNK; c++) begin
      wait_cq(c % NN, 1);
      crc = '1;
      for (int b = 0; b < CB; b++) crc = crc_ref(crc, init[c][c][b]);
      hsh[c] = cq_hdr[c % NN][0].hash;
      chk(cq_hdr[c % NN][0].opcode == (OP_BLOCK_HASH | RESP_BIT) && hsh[c] == crc,
          $sformatf("block hash chunk %0d: op %h hash %h expected %h status %0d", c, cq_hdr[c % NN][0].opcode, hsh[c], crc, cq_hdr[c % NN][0].status));
      cq_hdr[c % NN].delete();
    end

    // 2. reduce-scatter: all chains at once
    t0 = cyc;
    for (int c = 0; c < NCHUNK; c++) begin
      h = mk_hdr(OP_RSCATTER, 200 + c, 16'(CHUNK), 64'(c * CB) << 6, node_id(0));
      h.seg_left = 8'(NN - 1);
      for (int k = 1; k < NN; k++) h.segs[NN - 1 - k] = node_id(c + 1 + k);
      h.hash = hsh[c];
      post((c + 1) % NN, h);
      // a second, long host request queued behind it: it is still waiting
      // in the Request Queue when the first network packet arrives
      post((c + 1) % NN, mk_hdr(OP_BLOCK_HASH, 250 + c, 16'(CHUNK), 64'(c * CB) << 6, 0));
    end
    wait_cq(0, NCHUNK + 1);
    t_rs = cyc - t0;
    acks = 0;
    foreach (cq_hdr[0][i]) if (cq_hdr[0][i].opcode == (OP_RSCATTER | RESP_BIT) && cq_hdr[0][i].status == ST_OK) acks++;
    chk(acks == NCHUNK, $sformatf("reduce-scatter ACKs %0d", acks));
    repeat (2000) @(posedge clk);   // let the duplicate arrive and be dropped
    for (int c = 0; c < NCHUNK; c++)
      for (int b = 0; b < CB; b++)
        chk(mpeek(c % NN, c * CB + b) == red[c][b], $sformatf("reduced chunk %0d beat %0d", c, b));
    cq_hdr[0].delete();

    // 3. all-gather
    t0 = cyc;
    for (int c = 0; c < NCHUNK; c++) begin
      h = mk_hdr(OP_AGATHER, 300 + c, 16'(CHUNK), 64'(c * CB) << 6, node_id(0));
      h.seg_left = 8'(NN - 1);
      for (int k = 1; k < NN; k++) h.segs[NN - 1 - k] = node_id(c + k);
      post(c % NN, h);
    end
    wait_cq(0, NCHUNK);
    t_ag = cyc - t0;
    acks = 0;
    foreach (cq_hdr[0][i]) if (cq_hdr[0][i].opcode == (OP_AGATHER | RESP_BIT)) acks++;
    chk(acks == NCHUNK, $sformatf("all-gather ACKs %0d", acks));
    for (int n = 0; n < NN; n++)
      for (int c = 0; c < NCHUNK; c++)
        for (int b = 0; b < CB; b++)
          chk(mpeek(n, c * CB + b) == red[c][b], $sformatf("node %0d chunk %0d beat %0d", n, c, b));

    // 4. memory pool: node 0's host writes and reads eight blocks by global
    //    address; they land block-interleaved on the four devices
    pool_m = 1'b1;
    cq_hdr[0].delete();
    for (int k = 0; k < 8; k++) begin
      beat_t w;
      w = rnd_beat();
      pw[k] = w;
      hq[0].push_back('{sop: 1'b1, eop: 1'b0,
                       data: beat_data_t'(mk_hdr(OP_WRITE, 400 + k, 16, 64'(k) * 8192 + 64, 0))});
      hq[0].push_back('{sop: 1'b0, eop: 1'b1, data: w});
    end
    wait_cq(0, 8);
    acks = 0;
    foreach (cq_hdr[0][i]) if (cq_hdr[0][i].opcode == (OP_WRITE | RESP_BIT)) acks++;
    chk(acks == 8, $sformatf("pool write ACKs %0d", acks));
    for (int k = 0; k < 8; k++)
      chk(mpeek(k % NN, (k / NN) * CB + 1) == pw[k], $sformatf("pool block %0d placement", k));
    cq_hdr[0].delete();
    for (int k = 0; k < 8; k++) post(0, mk_hdr(OP_READ, 500 + k, 16, 64'(k) * 8192 + 64, 0));
    wait_cq(0, 8);
    repeat (50) @(posedge clk);
    for (int k = 0; k < 8; k++)
      chk(cq_dat[0].exists(500 + k) && cq_dat[0][500 + k] == pw[k], $sformatf("pool read %0d", k));
    chk(n_pool_remote == 12, $sformatf("pool requests sent to other devices %0d", n_pool_remote));

    // mechanisms
    begin
      int fwd, drop;
      fwd = 0; drop = 0;
      for (int n = 0; n < NN; n++) begin fwd += int'(s_fwd[n]); drop += int'(s_drop[n]); end
      $display("reduce-scatter %0d cycles, all-gather %0d cycles", t_rs, t_ag);
      $display("mechanisms: forwards=%0d drops=%0d contention=%0d mem_stall=%0d tx_stall=%0d",
               fwd, drop, n_contend, n_mem_stall, n_tx_stall);
      // each chain: NN-1 forwards for RS (first + intermediates) and for AG
      chk(fwd == 2 * NCHUNK * (NN - 1), "segment forwards");
      chk(drop == 1, "duplicate last-hop packet dropped");
      chk(n_contend > 0, "network/host arbitration contention");
      chk(n_mem_stall > 0, "memory back-pressure");
      chk(n_tx_stall > 0, "network back-pressure");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
