// netdam_tb_pkg: helpers shared by the NetDAM testbenches: header building,
// random float32 beats, element-wise reference arithmetic on beats and a
// bit-serial CRC-32 reference for the block hash.
package netdam_tb_pkg;
  import netdam_pkg::*;
  import fp_ref_pkg::*;

  typedef logic [511:0] beat_t;

  function automatic netdam_hdr_t mk_hdr(input logic [7:0] op, input logic [31:0] seq,
                                         input logic [15:0] len, input logic [63:0] addr,
                                         input logic [31:0] src);
    netdam_hdr_t h;
    h = '0;
    h.opcode = op; h.seq = seq; h.len = len; h.addr = addr; h.src_node = src;
    return h;
  endfunction

  function automatic beat_t rnd_beat();
    beat_t b;
    for (int i = 0; i < 16; i++) b[32*i +: 32] = rnd_f();
    return b;
  endfunction

  // element-wise float32 reference: 0 add, 1 sub, 2 mul, 3 xor, 4 min, 5 max
  function automatic beat_t beat_op(input int op, input beat_t a, input beat_t b);
    beat_t y;
    real ra, rb;
    for (int i = 0; i < 16; i++) begin
      ra = f2r(a[32*i +: 32]); rb = f2r(b[32*i +: 32]);
      case (op)
        0: y[32*i +: 32] = r2f(ra + rb);
        1: y[32*i +: 32] = r2f(ra - rb);
        2: y[32*i +: 32] = r2f(ra * rb);
        3: y[32*i +: 32] = a[32*i +: 32] ^ b[32*i +: 32];
        4: y[32*i +: 32] = (ra < rb) ? a[32*i +: 32] : b[32*i +: 32];
        default: y[32*i +: 32] = (ra < rb) ? b[32*i +: 32] : a[32*i +: 32];
      endcase
    end
    return y;
  endfunction

  // CRC-32, polynomial 0x04C11DB7, preset all ones, MSB first, no final xor
  function automatic logic [31:0] crc_ref(input logic [31:0] c, input beat_t d);
    logic [31:0] r;
    r = c;
    for (int i = 511; i >= 0; i--) begin
      if (r[31] ^ d[i]) r = (r << 1) ^ 32'h04C1_1DB7;
      else              r = r << 1;
    end
    return r;
  endfunction
endpackage
