// mqx_pkg: shared configuration, opcodes and bundle types of the MQX
// (multi-word extension) vector execution units.
//
// MQX adds three SIMD instructions to AVX-512 for multi-word (e.g. 128-bit)
// modular arithmetic: a widening 64x64->128 multiply (vpmulq), an add with
// per-lane carry-in/carry-out mask bits (vpadcq) and a subtract with per-lane
// borrow-in/borrow-out mask bits (vpsbbq). The vector shape follows the
// AVX-512 form of the extension: 8 lanes of 64-bit words, carries held in an
// 8-bit mask register. The 8-bit destination tag width is this design's own
// choice; the tag stands for whatever the host core uses to route results
// back to its register files.
package mqx_pkg;

  // Vector shape: 8 lanes x 64 bits (one zmm register), 8-bit k mask.
  parameter int unsigned MQX_LANES = 8;
  parameter int unsigned MQX_W     = 64;
  // Width of the destination tag carried with every instruction (assumed).
  parameter int unsigned MQX_TAG_W = 8;

  typedef logic [MQX_LANES-1:0][MQX_W-1:0] vec_t;   // one zmm register
  typedef logic [MQX_LANES-1:0]            mask_t;  // one k register
  typedef logic [MQX_TAG_W-1:0]            tag_t;

  // The three MQX instructions.
  typedef enum logic [1:0] {
    OP_ADC = 2'd0,  // _mm512_adc_epi64 / vpadcq
    OP_SBB = 2'd1,  // _mm512_sbb_epi64 / vpsbbq
    OP_MUL = 2'd2   // _mm512_mul_epi64 / vpmulq
  } mqx_op_e;

  // One instruction as the scheduler hands it to a port.
  typedef struct packed {
    logic    valid;
    mqx_op_e op;
    tag_t    tag;
    vec_t    a;
    vec_t    b;
    mask_t   cin;   // carry-in (adc) or borrow-in (sbb); unused by mul
  } mqx_uop_t;

  // Result of vpadcq / vpsbbq: one vector and one mask.
  typedef struct packed {
    logic    valid;
    mqx_op_e op;
    tag_t    tag;
    vec_t    c;
    mask_t   cout;  // carry-out (adc) or borrow-out (sbb)
  } mqx_alu_res_t;

  // Result of vpmulq: two vectors, high and low halves of the products.
  typedef struct packed {
    logic valid;
    tag_t tag;
    vec_t ch;
    vec_t cl;
  } mqx_mul_res_t;

endpackage
