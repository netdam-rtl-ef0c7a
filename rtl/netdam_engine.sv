// netdam_engine: instruction execution pipeline of a NetDAM device.
//
// Takes one NetDAM packet at a time (header beat, then data beats), stores
// its data in the packet buffer SRAM, executes the instruction against the
// directly attached memory and then either answers the sender or forwards
// the (possibly modified) packet to the next node of its segment list.
//
//   WRITE       payload -> memory; ACK
//   READ        memory -> response data
//   CAS         32-bit compare-and-swap on element 0 of the addressed beat:
//               data element 0 = expected, element 1 = new value; the old
//               beat is returned, status CAS_FAIL when it did not match
//   MEMCOPY     copies len elements from addr to the byte address held in
//               the low 64 bits of the first data beat; ACK
//   ADD..MAX    element-wise memory = memory OP payload (float32, XOR bitwise)
//   BLOCK_HASH  hash of the addressed block, returned in the header hash field
//   RSCATTER    ring reduce-scatter step. From the host (first node): the
//               local block is loaded into the packet, which is sent on.
//               Intermediate node: payload += local block in the packet
//               buffer only, memory untouched, packet sent on. Last node:
//               payload += local block and the sum is written to memory only
//               when the hash of the local block equals the packet's hash
//               field, otherwise the packet is dropped; ACK to src_node.
//   ALLGATHER   ring all-gather step. From the host: local block loaded and
//               sent on. Other nodes: payload -> memory, then sent on, or at
//               the last node an ACK to src_node.
//   opcode with bit 7 set: a response; delivered to the host unchanged.
//
// The instruction set, the in-buffer reduction of intermediate nodes, the
// block-hash check of the last node and the ACK of all-gather follow the
// design's description. The execution order is this design's: the engine
// works on one packet at a time. Passes that only move data (READ, WRITE,
// reduce-scatter and all-gather) are streamed: one memory request per clock,
// up to MAX_RD reads in flight, the SIMD sum applied as responses return.
// Read-modify-write passes (ADD..MAX, CAS, MEMCOPY) go one beat at a time
// (read, compute, write) so a write never overtakes a read of the same
// beat. Latency depends only on the length and the memory latency, never on
// other traffic: a READ of n beats answers 6 + n + L cycles after its
// header is accepted (L = memory read latency).
//
// Interfaces (valid/ready, a beat moves when both are high):
//   in_*   packet stream in; in_from_host marks a packet from the Request
//          Queue, constant over a packet
//   out_*  packet stream out; out_to_host sends it to the Complete Queue,
//          otherwise to the network toward node out_dst
//   mem_*  memory port in 64-byte beats: one outstanding request; a read
//          is answered by mem_rsp_valid/mem_rsp_rdata, in order, any latency
module netdam_engine
  import netdam_pkg::*;
#(
  parameter int unsigned MEM_AW    = 25,         // 2 GB of 64-byte beats
  parameter int unsigned BUF_DEPTH = MAX_BEATS,  // packet buffer, beats
  parameter int unsigned MAX_RD    = 32,         // memory reads in flight in a streaming pass
  localparam int unsigned BAW      = $clog2(BUF_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // packet in
  input  logic              in_valid,
  output logic              in_ready,
  input  pkt_beat_t         in_beat,
  input  logic              in_from_host,
  // packet out
  output logic              out_valid,
  input  logic              out_ready,
  output pkt_beat_t         out_beat,
  output logic              out_to_host,
  output logic [31:0]       out_dst,
  // memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [MEM_AW-1:0] mem_req_addr,
  output beat_data_t        mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  beat_data_t        mem_rsp_rdata,
  // statistics
  output logic [31:0]       stat_exec,     // packets executed
  output logic [31:0]       stat_fwd,      // packets forwarded by segment routing
  output logic [31:0]       stat_drop,     // reduce-scatter last hops dropped on hash mismatch
  output logic [31:0]       stat_resp      // responses delivered to the host
);

  typedef enum logic [3:0] {
    S_IDLE, S_RX, S_DECODE, S_PBUF, S_PRD, S_PWAIT, S_PALU, S_PWR, S_PNEXT,
    S_PSTR, S_PDRAIN, S_POST, S_TXH, S_TXD
  } state_e;

  typedef enum logic [2:0] {
    PM_NONE,   // read only (hash)
    PM_STORE,  // memory <- buffer
    PM_LOAD,   // buffer <- memory
    PM_ALU,    // memory <- memory OP buffer
    PM_SUM,    // buffer <- buffer + memory
    PM_CAS,    // compare and swap
    PM_COPY    // memory(dst) <- memory(src)
  } pmode_e;

  state_e       st;
  netdam_hdr_t  hdr;
  logic         from_host;
  logic [BAW:0] rx_cnt;
  logic [63:0]  first_word;  // MEMCOPY destination; only its beat-address bits are used
  logic [8:0]   nb;          // data beats of the instruction
  logic         phase;       // second pass of RSCATTER

  // pass configuration
  pmode_e            p_mode;
  logic              p_read, p_hash;
  logic [MEM_AW-1:0] p_raddr, p_waddr;
  logic [8:0]        p_n, idx;
  logic [8:0]        ri;         // streaming pass: next beat to request
  logic [BAW-1:0]    sum_idx;    // streaming SUM: beat whose ALU result is due
  logic              stream;     // current pass streams
  logic              s_issue;    // streaming pass: request offered this cycle
  alu_op_e           p_op;
  beat_data_t        wdata_q;

  // transmit
  netdam_hdr_t  tx_hdr;
  logic [8:0]   tx_n;
  logic         tx_host;
  logic [31:0]  tx_dst;
  logic [7:0]   status;

  // packet buffer
  logic           b_we, b_re;
  logic [BAW-1:0] b_waddr, b_raddr;
  beat_data_t     b_wdata, b_rdata;

  pkt_buffer #(.DEPTH(BUF_DEPTH), .W(BEAT_W)) u_buf (
    .clk, .we(b_we), .waddr(b_waddr), .wdata(b_wdata),
    .re(b_re), .raddr(b_raddr), .rdata(b_rdata)
  );

  // SIMD ALU: memory operand in a, packet operand in b
  logic       alu_in_valid, alu_out_valid;
  beat_data_t alu_y;
  simd_alu #(.N(LANES)) u_alu (
    .clk, .rst_n, .in_valid(alu_in_valid), .op(p_op),
    .a(mem_rsp_rdata), .b(b_rdata), .out_valid(alu_out_valid), .y(alu_y)
  );

  // block hash over the memory beats read in a pass
  logic        h_clear, h_en;
  logic [31:0] h_crc;
  block_hash #(.W(BEAT_W)) u_hash (
    .clk, .rst_n, .clear(h_clear), .en(h_en), .data(mem_rsp_rdata), .crc(h_crc)
  );

  // segment routing
  logic        sr_last, sr_bad;
  logic [31:0] sr_next;
  netdam_hdr_t sr_hdr;
  sr_router u_sr (
    .hdr_in(hdr), .last_hop(sr_last), .bad(sr_bad), .next_hop(sr_next), .hdr_out(sr_hdr)
  );

  netdam_hdr_t in_hdr;
  assign in_hdr = netdam_hdr_t'(in_beat.data);

  logic [MEM_AW-1:0] base_addr;
  assign base_addr = hdr.addr[MEM_AW+5:6];

  logic cas_hit;
  assign cas_hit = (mem_rsp_rdata[31:0] == b_rdata[31:0]);

  // streaming passes: loads, sums and hashes (read only) and stores (write
  // only) keep up to MAX_RD reads in flight and move one beat per clock;
  // read-modify-write passes (element ops, CAS, MEMCOPY) go beat by beat
  assign stream  = (p_mode == PM_LOAD) || (p_mode == PM_SUM) ||
                   (p_mode == PM_NONE) || (p_mode == PM_STORE);
  assign s_issue = (ri < p_n) && (!p_read || ((ri - idx) < 9'(MAX_RD)));

  // ------------------------------------------------------------ datapath strobes
  always_comb begin
    in_ready      = (st == S_IDLE) || (st == S_RX);
    b_we          = 1'b0;
    b_waddr       = rx_cnt[BAW-1:0];
    b_wdata       = in_beat.data;
    b_re          = 1'b0;
    b_raddr       = idx[BAW-1:0];
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = p_raddr + MEM_AW'(idx);
    mem_req_wdata = (p_mode == PM_STORE) ? b_rdata : wdata_q;
    alu_in_valid  = 1'b0;
    h_en          = 1'b0;
    h_clear       = 1'b0;
    out_valid     = 1'b0;
    out_beat      = '{sop: 1'b1, eop: (tx_n == 9'd0), data: beat_data_t'(tx_hdr)};
    out_to_host   = tx_host;
    out_dst       = tx_dst;
    unique case (st)
      S_RX: begin
        b_we = in_valid && (rx_cnt < (BAW+1)'(BUF_DEPTH));
      end
      S_DECODE: h_clear = 1'b1;
      S_PBUF:   b_re = 1'b1;
      S_PRD: begin
        mem_req_valid = 1'b1;
      end
      S_PWAIT: begin
        if (mem_rsp_valid) begin
          h_en         = p_hash;
          alu_in_valid = (p_mode == PM_ALU) || (p_mode == PM_SUM);
          b_waddr      = idx[BAW-1:0];
          b_wdata      = mem_rsp_rdata;
          b_we         = (p_mode == PM_LOAD) || (p_mode == PM_CAS);
        end
      end
      S_PALU: begin
        b_waddr = idx[BAW-1:0];
        b_wdata = alu_y;
        b_we    = alu_out_valid && (p_mode == PM_SUM);
      end
      S_PWR: begin
        mem_req_valid = 1'b1;
        mem_req_we    = 1'b1;
        mem_req_addr  = p_waddr + MEM_AW'(idx);
      end
      S_PSTR: begin
        // buffer read port follows the beat being answered (reads) or
        // requested (writes), one clock ahead of its use
        b_re = 1'b1;
        if (p_read) begin
          mem_req_valid = s_issue;
          mem_req_addr  = p_raddr + MEM_AW'(ri);
          b_raddr       = BAW'(idx + 9'(mem_rsp_valid));
          if (mem_rsp_valid) begin
            h_en         = p_hash;
            alu_in_valid = (p_mode == PM_SUM);
            b_waddr      = idx[BAW-1:0];
            b_wdata      = mem_rsp_rdata;
            b_we         = (p_mode == PM_LOAD);
          end
        end else begin
          mem_req_valid = s_issue;
          mem_req_we    = 1'b1;
          mem_req_addr  = p_waddr + MEM_AW'(ri);
          b_raddr       = BAW'(ri + 9'(mem_req_ready && s_issue));
        end
        if (alu_out_valid && p_mode == PM_SUM) begin
          b_waddr = sum_idx;
          b_wdata = alu_y;
          b_we    = 1'b1;
        end
      end
      S_PDRAIN: begin
        if (alu_out_valid && p_mode == PM_SUM) begin
          b_waddr = sum_idx;
          b_wdata = alu_y;
          b_we    = 1'b1;
        end
      end
      S_TXH: begin
        out_valid = 1'b1;
        b_re      = 1'b1;
        b_raddr   = '0;
      end
      S_TXD: begin
        out_valid = 1'b1;
        out_beat  = '{sop: 1'b0, eop: (idx == tx_n - 9'd1), data: b_rdata};
        if (out_ready && !(idx == tx_n - 9'd1)) begin
          b_re    = 1'b1;
          b_raddr = BAW'(idx + 9'd1);
        end
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ control
  // Control actions used by several states of the sequencer below.
  // START_PASS: run one pass of n beats in mode m (rd: read memory,
  // hs: fold the read beats into the block hash).
  `define NETDAM_START_PASS(m, rd, hs, n) \
    begin p_mode <= m; p_read <= rd; p_hash <= hs; p_n <= n; idx <= '0; ri <= '0; \
          st <= ((n) == 9'd0) ? S_POST : S_PBUF; end
  // RESPOND: answer the requester (host queue or src_node) with status s and
  // n data beats taken from the packet buffer.
  `define NETDAM_RESPOND(s, n) \
    begin tx_hdr <= hdr; tx_hdr.opcode <= hdr.opcode | RESP_BIT; tx_hdr.status <= s; \
          tx_hdr.len <= ((n) == 9'd0) ? 16'd0 : hdr.len; tx_hdr.hash <= h_crc; \
          tx_n <= n; tx_host <= from_host; tx_dst <= hdr.src_node; st <= S_TXH; end
  // FORWARD: send the packet with its segment popped to the next segment.
  `define NETDAM_FORWARD \
    begin tx_hdr <= sr_hdr; tx_n <= nb; tx_host <= 1'b0; tx_dst <= sr_next; \
          st <= S_TXH; stat_fwd <= stat_fwd + 1; end

  function automatic alu_op_e op_to_alu(input logic [7:0] o);
    case (o)
      OP_SUB:  return ALU_SUB;
      OP_MUL:  return ALU_MUL;
      OP_XOR:  return ALU_XOR;
      OP_MIN:  return ALU_MIN;
      OP_MAX:  return ALU_MAX;
      default: return ALU_ADD;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      hdr <= '0; from_host <= 1'b0; rx_cnt <= '0; first_word <= '0; nb <= '0;
      phase <= 1'b0; p_mode <= PM_NONE; p_read <= 1'b0;
      p_hash <= 1'b0; ri <= '0; sum_idx <= '0; p_raddr <= '0; p_waddr <= '0; p_n <= '0; idx <= '0;
      p_op <= ALU_ADD; wdata_q <= '0; tx_hdr <= '0; tx_n <= '0; tx_host <= 1'b0;
      tx_dst <= '0; status <= ST_OK;
      stat_exec <= '0; stat_fwd <= '0; stat_drop <= '0; stat_resp <= '0;
    end else begin
      unique case (st)
        // ---------------------------------------------------- receive
        S_IDLE: begin
          if (in_valid && in_beat.sop) begin
            hdr       <= in_hdr;
            from_host <= in_from_host;
            nb        <= beats_of(in_hdr.len);
            rx_cnt    <= '0;
            st        <= in_beat.eop ? S_DECODE : S_RX;
          end
        end
        S_RX: begin
          if (in_valid) begin
            if (rx_cnt == '0) first_word <= in_beat.data[63:0];
            if (rx_cnt < (BAW+1)'(BUF_DEPTH)) rx_cnt <= rx_cnt + 1'b1;
            if (in_beat.eop) st <= S_DECODE;
          end
        end
        // ---------------------------------------------------- decode
        S_DECODE: begin
          p_raddr <= base_addr;
          p_waddr <= base_addr;
          p_op    <= op_to_alu(hdr.opcode);
          phase   <= 1'b0;
          status  <= ST_OK;
          if (hdr.opcode[7]) begin
            // a response from a remote node: hand it to the host as it is
            tx_hdr  <= hdr;
            tx_n    <= 9'(rx_cnt);
            tx_host <= 1'b1;
            tx_dst  <= hdr.src_node;
            st      <= S_TXH;
          end else begin
            stat_exec <= stat_exec + 1;
            unique case (hdr.opcode)
              OP_WRITE:      `NETDAM_START_PASS(PM_STORE, 1'b0, 1'b0, nb)
              OP_READ:       `NETDAM_START_PASS(PM_LOAD, 1'b1, 1'b0, nb)
              OP_CAS:        `NETDAM_START_PASS(PM_CAS, 1'b1, 1'b0, 9'd1)
              OP_MEMCOPY: begin
                p_waddr <= first_word[MEM_AW+5:6];
                `NETDAM_START_PASS(PM_COPY, 1'b1, 1'b0, nb)
              end
              OP_ADD, OP_SUB, OP_MUL, OP_XOR, OP_MIN, OP_MAX:
                             `NETDAM_START_PASS(PM_ALU, 1'b1, 1'b0, nb)
              OP_BLOCK_HASH: `NETDAM_START_PASS(PM_NONE, 1'b1, 1'b1, nb)
              OP_RSCATTER: begin
                p_op <= ALU_ADD;
                if (from_host) `NETDAM_START_PASS(PM_LOAD, 1'b1, 1'b0, nb)
                else           `NETDAM_START_PASS(PM_SUM, 1'b1, 1'b1, nb)
              end
              OP_AGATHER: begin
                if (from_host) `NETDAM_START_PASS(PM_LOAD, 1'b1, 1'b0, nb)
                else           `NETDAM_START_PASS(PM_STORE, 1'b0, 1'b0, nb)
              end
              default:       `NETDAM_RESPOND(ST_BAD_OP, 9'd0)
            endcase
          end
        end
        // ---------------------------------------------------- one beat of a pass
        S_PBUF:  st <= stream ? S_PSTR : (p_read ? S_PRD : S_PWR);
        S_PSTR: begin
          if (mem_req_valid && mem_req_ready) ri <= ri + 9'd1;
          if (p_read && mem_rsp_valid) begin
            idx     <= idx + 9'd1;
            sum_idx <= idx[BAW-1:0];
          end
          if (p_read ? (mem_rsp_valid && idx + 9'd1 == p_n)
                     : (mem_req_valid && mem_req_ready && ri + 9'd1 == p_n))
            st <= S_PDRAIN;
        end
        S_PDRAIN: st <= S_POST;
        S_PRD:   if (mem_req_ready) st <= S_PWAIT;
        S_PWAIT: begin
          if (mem_rsp_valid) begin
            unique case (p_mode)
              PM_ALU, PM_SUM: st <= S_PALU;
              PM_COPY: begin
                wdata_q <= mem_rsp_rdata;
                st      <= S_PWR;
              end
              PM_CAS: begin
                wdata_q <= {mem_rsp_rdata[BEAT_W-1:32], b_rdata[63:32]};
                if (cas_hit) st <= S_PWR;
                else begin
                  status <= ST_CAS_FAIL;
                  st     <= S_PNEXT;
                end
              end
              default: st <= S_PNEXT;
            endcase
          end
        end
        S_PALU: begin
          if (alu_out_valid) begin
            wdata_q <= alu_y;
            st      <= (p_mode == PM_ALU) ? S_PWR : S_PNEXT;
          end
        end
        S_PWR:   if (mem_req_ready) st <= S_PNEXT;
        S_PNEXT: begin
          idx <= idx + 9'd1;
          st  <= (idx + 9'd1 == p_n) ? S_POST : S_PBUF;
        end
        // ---------------------------------------------------- after a pass
        S_POST: begin
          unique case (hdr.opcode)
            OP_READ:       `NETDAM_RESPOND(ST_OK, nb)
            OP_CAS:        `NETDAM_RESPOND(status, 9'd1)
            OP_BLOCK_HASH: `NETDAM_RESPOND(ST_OK, 9'd0)
            OP_RSCATTER: begin
              if (phase) `NETDAM_RESPOND(ST_OK, 9'd0)
              else if (from_host || !sr_last) begin
                if (sr_last || sr_bad) `NETDAM_RESPOND(ST_BAD_ROUTE, 9'd0)
                else `NETDAM_FORWARD
              end else if (h_crc == hdr.hash) begin
                // last hop, block unchanged: commit the sum
                phase <= 1'b1;
                `NETDAM_START_PASS(PM_STORE, 1'b0, 1'b0, nb)
              end else begin
                // last hop, block already changed: duplicate, drop it
                stat_drop <= stat_drop + 1;
                st        <= S_IDLE;
              end
            end
            OP_AGATHER: begin
              if (sr_last && !from_host) `NETDAM_RESPOND(ST_OK, 9'd0)
              else if (sr_last || sr_bad) `NETDAM_RESPOND(ST_BAD_ROUTE, 9'd0)
              else `NETDAM_FORWARD
            end
            default:       `NETDAM_RESPOND(ST_OK, 9'd0)
          endcase
        end
        // ---------------------------------------------------- transmit
        S_TXH: begin
          if (out_ready) begin
            idx <= '0;
            st  <= (tx_n == 9'd0) ? S_IDLE : S_TXD;
            if (tx_host) stat_resp <= stat_resp + 1;
          end
        end
        S_TXD: begin
          if (out_ready) begin
            idx <= idx + 9'd1;
            if (idx == tx_n - 9'd1) st <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // memory requests are only issued in the request states
  a_mem_req_state: assert property (@(posedge clk) disable iff (!rst_n)
                                    mem_req_valid |-> (st == S_PRD || st == S_PWR || st == S_PSTR));
  // a request stays stable until it is accepted
  a_mem_req_hold:  assert property (@(posedge clk) disable iff (!rst_n)
                                    (mem_req_valid && !mem_req_ready) |=>
                                    (mem_req_valid && $stable(mem_req_addr) && $stable(mem_req_we)));

  `undef NETDAM_START_PASS
  `undef NETDAM_RESPOND
  `undef NETDAM_FORWARD

endmodule
