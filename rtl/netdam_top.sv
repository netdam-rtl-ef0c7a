// netdam_top: one NetDAM device - memory attached directly to the network
// port, with an instruction engine in between.
//
// Packets reach the device from two sides: from the Ethernet controller
// (other nodes, or a controller, talking NetDAM over IP/UDP) and from the
// local host, which writes NetDAM packets into the Request Queue of its queue
// pair and collects answers from the Complete Queue. A packet-level arbiter
// feeds both streams into one instruction engine, which executes each packet
// against the attached memory and either answers it (to the Complete Queue
// when it came from the host, to the network otherwise) or forwards it to the
// next node of its segment list. Responses that arrive from the network are
// delivered to the Complete Queue. In memory-pool mode the host's addresses
// are global: pool_router translates them (block interleaved over the pool's
// devices) and sends requests for other devices straight to the network,
// merged with the engine's output by a second packet arbiter.
//
// Not inside this module, brought out as ports: the Ethernet MAC/PHY with the
// IP/UDP encapsulation (net_rx_* / net_tx_*, which carry bare NetDAM packets
// and, on transmit, the node id of the next hop), the host bus (PCIe/CXL/CHI)
// that reaches the queue pair (host_rq_* / host_cq_*), and the HBM/DRAM with
// its controller (mem_*, 64-byte beats, in-order read responses).
//
// All streams are valid/ready with a beat of {sop, eop, 512-bit data}; the
// first beat of a packet is the netdam_hdr_t header.
module netdam_top
  import netdam_pkg::*;
#(
  parameter int unsigned MEM_AW    = 25,         // 2 GB HBM per device
  parameter int unsigned BUF_DEPTH = MAX_BEATS,  // packet buffer beats
  parameter int unsigned RQ_DEPTH  = 256,        // Request Queue beats
  parameter int unsigned CQ_DEPTH  = 256,        // Complete Queue beats
  parameter int unsigned NDEV      = 4,          // devices in the memory pool
  parameter int unsigned POOL_BLOCK = 8192       // pool interleave block, bytes
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic [31:0]       my_node,      // this device's node id
  input  logic              pool_mode,    // host addresses are global pool addresses
  input  logic [NDEV-1:0][31:0] pool_nodes, // node ids of the pool, in interleave order
  // Ethernet controller side
  input  logic              net_rx_valid,
  output logic              net_rx_ready,
  input  pkt_beat_t         net_rx_beat,
  output logic              net_tx_valid,
  input  logic              net_tx_ready,
  output pkt_beat_t         net_tx_beat,
  output logic [31:0]       net_tx_dst,
  // host side: queue pair
  input  logic              host_rq_valid,
  output logic              host_rq_ready,
  input  pkt_beat_t         host_rq_beat,
  output logic              host_cq_valid,
  input  logic              host_cq_ready,
  output pkt_beat_t         host_cq_beat,
  // attached memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [MEM_AW-1:0] mem_req_addr,
  output beat_data_t        mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  beat_data_t        mem_rsp_rdata,
  // statistics
  output logic [31:0]       stat_exec,
  output logic [31:0]       stat_fwd,
  output logic [31:0]       stat_drop,
  output logic [31:0]       stat_resp,
  output logic [$clog2(RQ_DEPTH):0] rq_level,   // beats waiting in the Request Queue
  output logic [$clog2(CQ_DEPTH):0] cq_level    // beats waiting in the Complete Queue
);

  // Request Queue
  logic      rq_valid, rq_ready;
  pkt_beat_t rq_beat;
  qp_queue #(.DEPTH(RQ_DEPTH)) u_rq (
    .clk, .rst_n,
    .in_valid(host_rq_valid), .in_ready(host_rq_ready), .in_beat(host_rq_beat),
    .out_valid(rq_valid), .out_ready(rq_ready), .out_beat(rq_beat), .count(rq_level)
  );

  // host requests: local engine, or (pool mode) another device
  logic        loc_valid, loc_ready, rem_valid, rem_ready;
  pkt_beat_t   loc_beat, rem_beat;
  logic [31:0] rem_dst;
  pool_router #(.NDEV(NDEV), .BLOCK_BYTES(POOL_BLOCK)) u_pool (
    .clk, .rst_n, .pool_mode, .pool_nodes, .my_node,
    .in_valid(rq_valid), .in_ready(rq_ready), .in_beat(rq_beat),
    .loc_valid, .loc_ready, .loc_beat,
    .rem_valid, .rem_ready, .rem_beat, .rem_dst
  );

  // arbiter: network and host into the engine
  logic      eng_in_valid, eng_in_ready, eng_in_host;
  pkt_beat_t eng_in_beat;
  pkt_arbiter u_arb (
    .clk, .rst_n,
    .net_valid(net_rx_valid), .net_ready(net_rx_ready), .net_beat(net_rx_beat),
    .host_valid(loc_valid), .host_ready(loc_ready), .host_beat(loc_beat),
    .out_valid(eng_in_valid), .out_ready(eng_in_ready), .out_beat(eng_in_beat),
    .out_from_host(eng_in_host)
  );

  // engine
  logic        eng_out_valid, eng_out_ready, eng_out_host;
  pkt_beat_t   eng_out_beat;
  logic [31:0] eng_out_dst;
  netdam_engine #(.MEM_AW(MEM_AW), .BUF_DEPTH(BUF_DEPTH)) u_eng (
    .clk, .rst_n,
    .in_valid(eng_in_valid), .in_ready(eng_in_ready), .in_beat(eng_in_beat),
    .in_from_host(eng_in_host),
    .out_valid(eng_out_valid), .out_ready(eng_out_ready), .out_beat(eng_out_beat),
    .out_to_host(eng_out_host), .out_dst(eng_out_dst),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata,
    .stat_exec, .stat_fwd, .stat_drop, .stat_resp
  );

  // network transmit: engine output and pool requests for other devices
  logic tx_net_valid, tx_net_ready, tx_from_host;
  assign tx_net_valid = eng_out_valid && !eng_out_host;
  pkt_arbiter u_txarb (
    .clk, .rst_n,
    .net_valid(tx_net_valid), .net_ready(tx_net_ready), .net_beat(eng_out_beat),
    .host_valid(rem_valid), .host_ready(rem_ready), .host_beat(rem_beat),
    .out_valid(net_tx_valid), .out_ready(net_tx_ready), .out_beat(net_tx_beat),
    .out_from_host(tx_from_host)
  );
  assign net_tx_dst = tx_from_host ? rem_dst : eng_out_dst;

  // Complete Queue
  logic      cq_in_valid, cq_in_ready;
  qp_queue #(.DEPTH(CQ_DEPTH)) u_cq (
    .clk, .rst_n,
    .in_valid(cq_in_valid), .in_ready(cq_in_ready), .in_beat(eng_out_beat),
    .out_valid(host_cq_valid), .out_ready(host_cq_ready), .out_beat(host_cq_beat),
    .count(cq_level)
  );

  // engine output: to the host Complete Queue or to the network
  assign cq_in_valid   = eng_out_valid && eng_out_host;
  assign eng_out_ready = eng_out_host ? cq_in_ready : tx_net_ready;

endmodule
