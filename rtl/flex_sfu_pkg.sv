// flex_sfu_pkg: types and constants shared by the Flex-SFU blocks.
//
// Flex-SFU approximates an activation function by a non-uniform piecewise
// linear function. Every 32-bit word that travels through the unit is a SIMD
// bundle of four 8-bit slices, read as 4x8-bit, 2x16-bit or 1x32-bit elements,
// in two's-complement fixed point or in sign-magnitude floating point.
// The four slices, the 8-bit slice width and the three element widths follow
// the paper. The instruction encoding below is this design's own choice; the
// paper names the instructions (ld.bp, ld.cf, exe.af) but gives no encoding.
//
// Instruction word (16 bits):
//   [1:0]  opcode   0 nop, 1 ld.bp, 2 ld.cf, 3 exe.af
//   [3:2]  width    0 8-bit, 1 16-bit, 2 32-bit, 3 reserved (illegal)
//   [4]    float    1 floating point, 0 fixed point
//   [5]    coefsel  ld.cf only: 0 loads slope m, 1 loads offset q
//   [7:6]  reserved, must be 0 (illegal otherwise)
//   [15:8] index    ld.bp: breakpoint index, ld.cf: segment index
package flex_sfu_pkg;

  localparam int unsigned NSLICE  = 4;            // 8-bit slices per 32-bit word
  localparam int unsigned SLICE_W = 8;            // minimum element width
  localparam int unsigned WORD_W  = NSLICE * SLICE_W;
  localparam int unsigned INSTR_W = 16;
  localparam int unsigned IDX_W   = 8;

  typedef enum logic [1:0] {
    OP_NOP   = 2'd0,
    OP_LD_BP = 2'd1,
    OP_LD_CF = 2'd2,
    OP_EXE   = 2'd3
  } op_e;

  typedef enum logic [1:0] {
    W8  = 2'd0,
    W16 = 2'd1,
    W32 = 2'd2
  } width_e;

  typedef struct packed {
    width_e width;
    logic   is_float;
  } fmt_t;

  typedef struct packed {
    op_e              op;
    fmt_t             fmt;
    logic             coef_q;   // ld.cf: 0 = m, 1 = q
    logic [IDX_W-1:0] idx;
  } ctrl_t;

endpackage
