// zk_pkg: field definition and shared types for the ZeroCheck accelerators.
//
// All arithmetic is over the 255-bit prime field used by BLS12-381-based
// provers (the scalar field r of BLS12-381).  An element is kept in canonical
// form, 0 <= x < MODULUS, in a FE_W-bit word.  The modulus has a 2-adicity of
// 32, so NTTs of up to 2^32 points exist in it; ROOT_2_32 is a primitive
// 2^32-th root of unity and GENERATOR a multiplicative generator, which the
// NTT system uses as its coset shift.
//
// The field width follows the paper (255-bit primes); the choice of this
// particular prime and the constants below are this design's own.
package zk_pkg;

  localparam int unsigned FE_W = 255;

  typedef logic [FE_W-1:0] fe_t;

  localparam fe_t MODULUS =
    255'h73eda753299d7d483339d80809a1d80553bda402fffe5bfeffffffff00000001;

  // Multiplicative generator of the field (7) and 2^32-th root of unity 7^((p-1)/2^32).
  localparam fe_t GENERATOR = 255'd7;
  localparam int unsigned TWO_ADICITY = 32;

  // Evaluation-point count of the SumCheck extension engines (X_i = 0..3).
  localparam int unsigned EXT_POINTS = 4;

  // Selector codes of a product-lane input (pack-and-select).
  typedef enum logic [2:0] {
    SEL_ONE  = 3'd0,   // constant 1 (unused factor)
    SEL_TMP  = 3'd1,   // partial product from the Tmp MLE buffer
    SEL_MLE  = 3'd2    // extension of the MLE slot given by the slot index
  } sel_kind_e;

  typedef struct packed {
    sel_kind_e   kind;
    logic [2:0]  slot;
  } factor_sel_t;

endpackage
