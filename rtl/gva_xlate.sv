// gva_xlate: global-address translation for the NetDAM memory pool.
//
// Several NetDAM devices form one memory pool. In pool mode a host gives a
// global virtual address; this unit maps it to the device that holds it and
// to the local address inside that device. The pool is block interleaved:
// consecutive BLOCK_BYTES blocks go to consecutive devices, so a stream of
// accesses, or many senders writing to one region, is spread over all
// devices instead of piling onto one (incast avoidance).
//   block  = gva / BLOCK_BYTES
//   device = block mod NDEV                 -> dst_node = node_ids[device]
//   local  = (block / NDEV) * BLOCK_BYTES + gva mod BLOCK_BYTES
// The interleaving itself follows the design; NDEV = 4 is the prototype's
// device count, BLOCK_BYTES = 8 KiB (2048 float32, the block of the
// block-hash) is this design's choice; both must be powers of two. An access
// is assumed not to cross a block boundary. Combinational.
module gva_xlate #(
  parameter int unsigned NDEV        = 4,
  parameter int unsigned BLOCK_BYTES = 8192,
  localparam int unsigned DW = (NDEV > 1) ? $clog2(NDEV) : 1,
  localparam int unsigned BW = $clog2(BLOCK_BYTES)
) (
  input  logic [63:0]            gva,
  input  logic [NDEV-1:0][31:0]  node_ids,
  input  logic [31:0]            my_node,
  output logic [DW-1:0]          dev,
  output logic [31:0]            dst_node,
  output logic                   remote,    // the address lives on another device
  output logic [63:0]            local_addr
);

  logic [63:0] blk;

  always_comb begin
    blk        = gva >> BW;
    dev        = DW'(blk % 64'(NDEV));
    dst_node   = node_ids[dev];
    remote     = (dst_node != my_node);
    local_addr = (((blk / 64'(NDEV))) << BW) | (gva & 64'(BLOCK_BYTES - 1));
  end

endmodule
