// cmc_pkg: types and constants shared by the compression-aware memory
// controller. The element format is BF16 (1 sign, 8 exponent, 7 fraction
// bits), so a block of values splits into 16 bit-planes. A lane moves 256 bits
// per cycle, which at 2 GHz is the 512 Gbit/s single-lane throughput of the
// design; a beat therefore carries 16 BF16 values, value k in bits [16k+15:16k].
// Bit-plane i holds bit i of every value (plane 15 = sign, planes 14..7 =
// exponent, planes 6..0 = fraction).
// Weight blocks may also hold 8-bit (FP8) or 4-bit (INT4) elements, as in
// models already quantized before storage: such a block has 8 or 4 planes, a
// beat carries 32 or 64 elements (element k in bits [W*k+W-1:W*k]) and a
// block of NVALS elements takes 1/2 or 1/4 of the beats. KV cache blocks are
// always BF16.
package cmc_pkg;
  localparam int unsigned VAL_W         = 16;              // BF16 element
  localparam int unsigned NPLANES       = VAL_W;           // one plane per bit
  localparam int unsigned BEAT_W        = 256;             // 512 Gbit/s at 2 GHz
  localparam int unsigned VALS_PER_BEAT = BEAT_W / VAL_W;  // 16
  localparam int unsigned EXP_LSB       = 7;               // BF16 exponent field
  localparam int unsigned EXP_W         = 8;
  localparam int unsigned ADDR_W        = 40;              // byte address (1 TiB per lane)
  localparam int unsigned LEN_W         = 16;              // compressed plane length
  localparam int unsigned PLANE_HDR_BYTES = 2 * NPLANES;   // 16 x 16-bit lengths

  // What a block holds: the controller only needs to know weights from KV cache.
  typedef enum logic {KIND_WEIGHT = 1'b0, KIND_KV = 1'b1} kind_e;
  typedef enum logic {OP_WRITE = 1'b0, OP_READ = 1'b1} op_e;
  // Element format of a block.
  typedef enum logic [1:0] {FMT_BF16 = 2'd0, FMT_FP8 = 2'd1, FMT_INT4 = 2'd2} fmt_e;

  // log2 of how many times narrower than BF16 an element is: 0, 1 or 2.
  // A block of that format has 16 >> fmt_shift planes and needs
  // NVALS / 16 >> fmt_shift input beats.
  function automatic logic [1:0] fmt_shift(fmt_e f);
    return (f == FMT_FP8) ? 2'd1 : (f == FMT_INT4) ? 2'd2 : 2'd0;
  endfunction

  // One host command: write or read one block at a byte address. nplanes is
  // the number of most significant planes a read fetches (1 up to the
  // format's plane count); fmt must be the format the block was written in.
  typedef struct packed {
    op_e               op;
    kind_e             kind;
    fmt_e              fmt;
    logic [ADDR_W-1:0] base;
    logic [4:0]        nplanes;
  } cmd_t;
endpackage
