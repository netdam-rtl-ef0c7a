// netdam_pkg: types and constants shared by the NetDAM device.
//
// A NetDAM packet (sequence number, segment routing header, instruction,
// memory address, data) is carried on a 512-bit beat stream: the first beat
// of a packet is the header, the following beats are the data, 16 float32
// elements per beat. The field list and its order follow the packet format
// of the design; every width, the opcode encoding and the beat width are
// this implementation's choices.
package netdam_pkg;

  // Datapath: one beat holds LANES float32 elements.
  localparam int unsigned LANES   = 16;
  localparam int unsigned BEAT_W  = 32 * LANES;          // 512 bits
  // Largest SIMD vector of one instruction: ~2048 float32 (a 9000-byte frame).
  localparam int unsigned MAX_ELEMS = 2048;
  localparam int unsigned MAX_BEATS = MAX_ELEMS / LANES; // 128
  // Segment list depth of the segment routing header.
  localparam int unsigned NSEG    = 8;

  typedef logic [BEAT_W-1:0] beat_data_t;

  // Instruction field. Bit 7 marks a response (ACK / read data / hash);
  // 0x40-0x7F are left free for user-defined instructions.
  typedef enum logic [7:0] {
    OP_NOP        = 8'h00,
    OP_WRITE      = 8'h01,
    OP_READ       = 8'h02,
    OP_CAS        = 8'h03,
    OP_MEMCOPY    = 8'h04,
    OP_ADD        = 8'h10,
    OP_SUB        = 8'h11,
    OP_MUL        = 8'h12,
    OP_XOR        = 8'h13,
    OP_MIN        = 8'h14,
    OP_MAX        = 8'h15,
    OP_RSCATTER   = 8'h20,   // ring reduce-scatter step
    OP_AGATHER    = 8'h21,   // ring all-gather step
    OP_BLOCK_HASH = 8'h22
  } opcode_e;

  localparam logic [7:0] RESP_BIT = 8'h80;

  // Status field of a response.
  localparam logic [7:0] ST_OK        = 8'h00;
  localparam logic [7:0] ST_BAD_OP    = 8'h01;
  localparam logic [7:0] ST_CAS_FAIL  = 8'h02;
  localparam logic [7:0] ST_BAD_ROUTE = 8'h03;

  // Per-lane ALU operation.
  typedef enum logic [2:0] {
    ALU_ADD = 3'd0,
    ALU_SUB = 3'd1,
    ALU_MUL = 3'd2,
    ALU_XOR = 3'd3,
    ALU_MIN = 3'd4,
    ALU_MAX = 3'd5,
    ALU_PASS_B = 3'd6   // result = b (used to load memory data unchanged)
  } alu_op_e;

  // Header beat. Segments follow the SRv6 convention: seg_left counts the
  // segments still to visit and segs[seg_left-1] is the next one.
  typedef struct packed {
    logic [31:0]            seq;       // sequence number
    logic [7:0]             seg_left;  // segment routing: segments left
    logic [NSEG-1:0][31:0]  segs;      // segment routing: node ids
    logic [7:0]             opcode;    // instruction
    logic [7:0]             status;    // response status
    logic [15:0]            len;       // data length in float32 elements
    logic [63:0]            addr;      // memory address (byte, 64B aligned)
    logic [31:0]            hash;      // block hash carried by RS / returned by BLOCK_HASH
    logic [31:0]            src_node;  // node that receives responses / ACK
    logic [55:0]            pad;
  } netdam_hdr_t;

  // One beat of the packet stream.
  typedef struct packed {
    logic       sop;
    logic       eop;
    beat_data_t data;
  } pkt_beat_t;

  // Number of data beats for a length in elements (rounded up to whole beats).
  function automatic logic [8:0] beats_of(input logic [15:0] len);
    logic [16:0] b;
    b = ({1'b0, len} + 17'(LANES - 1)) / 17'(LANES);
    return (b > 17'(MAX_BEATS)) ? 9'(MAX_BEATS) : b[8:0];
  endfunction

endpackage
