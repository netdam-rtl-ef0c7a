// pool_router: host request path of a NetDAM device in memory-pool mode.
//
// Sits between the Request Queue and the engine. With pool_mode low every
// host packet goes to the local engine unchanged. With pool_mode high the
// address of a single-device instruction (WRITE, READ, CAS, MEMCOPY, the
// element operations, BLOCK_HASH) is a global virtual address: gva_xlate
// finds the device that owns it and the local address there. The header is
// rewritten with the local address; a packet for this device goes to the
// local engine, a packet for another device is sent to the network toward
// that device, with src_node set to this device so that the answer comes
// back here and reaches the Complete Queue. Reduce-scatter and all-gather
// carry explicit node lists and local addresses and are never translated.
// The route is decided on the header beat and held to the end of the packet.
// All streams valid/ready; combinational except for the held route.
module pool_router
  import netdam_pkg::*;
#(
  parameter int unsigned NDEV        = 4,
  parameter int unsigned BLOCK_BYTES = 8192
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  pool_mode,
  input  logic [NDEV-1:0][31:0] pool_nodes,
  input  logic [31:0]           my_node,
  // from the Request Queue
  input  logic                  in_valid,
  output logic                  in_ready,
  input  pkt_beat_t             in_beat,
  // to the local engine
  output logic                  loc_valid,
  input  logic                  loc_ready,
  output pkt_beat_t             loc_beat,
  // to the network
  output logic                  rem_valid,
  input  logic                  rem_ready,
  output pkt_beat_t             rem_beat,
  output logic [31:0]           rem_dst
);

  localparam int unsigned DW = (NDEV > 1) ? $clog2(NDEV) : 1;

  netdam_hdr_t h_in, h_out;
  logic [DW-1:0] dev;     // owner index; unused here, dst carries its node id
  logic [31:0]   dst;
  logic          remote;
  logic [63:0]   laddr;

  assign h_in = netdam_hdr_t'(in_beat.data);

  gva_xlate #(.NDEV(NDEV), .BLOCK_BYTES(BLOCK_BYTES)) u_xlate (
    .gva(h_in.addr), .node_ids(pool_nodes), .my_node, .dev, .dst_node(dst),
    .remote, .local_addr(laddr)
  );

  function automatic logic translatable(input logic [7:0] op);
    case (op)
      OP_WRITE, OP_READ, OP_CAS, OP_MEMCOPY, OP_ADD, OP_SUB, OP_MUL, OP_XOR,
      OP_MIN, OP_MAX, OP_BLOCK_HASH: return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

  logic xl, route_now, route_q, route;
  logic [31:0] dst_q;

  assign xl        = pool_mode && translatable(h_in.opcode);
  assign route_now = xl && remote;
  assign route     = in_beat.sop ? route_now : route_q;

  always_comb begin
    h_out = h_in;
    if (xl) begin
      h_out.addr = laddr;
      if (remote) h_out.src_node = my_node;
    end
  end

  pkt_beat_t beat_x;
  assign beat_x = in_beat.sop ? '{sop: 1'b1, eop: in_beat.eop, data: beat_data_t'(h_out)} : in_beat;

  assign loc_valid = in_valid && !route;
  assign rem_valid = in_valid &&  route;
  assign loc_beat  = beat_x;
  assign rem_beat  = beat_x;
  assign rem_dst   = in_beat.sop ? dst : dst_q;
  assign in_ready  = route ? rem_ready : loc_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      route_q <= 1'b0;
      dst_q   <= '0;
    end else if (in_valid && in_ready && in_beat.sop) begin
      route_q <= route_now;
      dst_q   <= dst;
    end
  end

endmodule
