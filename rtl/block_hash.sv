// block_hash: running hash over a block of memory beats.
//
// Used by the BLOCK-HASH instruction and by the last hop of a reduce-scatter,
// which writes its sum to memory only if the hash of the local block still
// equals the hash carried by the packet; a retransmitted packet then finds
// the block already changed and is dropped, which keeps the write idempotent.
// The design does not define its hash; this block uses CRC-32 (polynomial
// 0x04C11DB7, register preset to all ones, no final inversion), feeding each
// beat most significant bit first, one beat per clock.
//
// Interface: clear presets the register; en folds data into it. crc holds
// the hash of all beats folded since the last clear, one clock after the last
// en.
module block_hash #(
  parameter int unsigned W = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  input  logic [W-1:0] data,
  output logic [31:0]  crc
);

  localparam logic [31:0] POLY = 32'h04C1_1DB7;

  function automatic logic [31:0] crc_step(input logic [31:0] c, input logic [W-1:0] d);
    logic [31:0] r;
    logic fb;
    r = c;
    for (int i = W - 1; i >= 0; i--) begin
      fb = r[31] ^ d[i];
      r  = {r[30:0], 1'b0} ^ (fb ? POLY : 32'd0);
    end
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     crc <= '1;
    else if (clear) crc <= '1;
    else if (en)    crc <= crc_step(crc, data);
  end

endmodule
