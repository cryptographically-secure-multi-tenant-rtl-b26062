// kac_pkg - shared widths, curve constants and types of the KAC key-recovery
// datapath.
//
// The field is F_p with a 256-bit wide datapath. The default prime and curve
// coefficient are those of the widely used 254-bit Barreto-Naehrig curve
// y^2 = x^3 + 3 (p below); the curve family and the 256-bit field width come
// from the design description, the particular curve is a choice of this
// implementation. A pairing value lives in F_p12 and is carried as twelve
// F_p coefficients. AES keys and blocks are 128 bits.
package kac_pkg;

  localparam int unsigned FP_W = 256;
  localparam int unsigned FP12_N = 12;
  localparam int unsigned AES_W = 128;

  typedef logic [FP_W-1:0] fp_t;

  // BN254 field prime (y^2 = x^3 + 3).
  localparam fp_t BN_P = 256'h30644e72e131a029b85045b68181585d97816a916871ca8d3c208c16d87cfd47;

  typedef struct packed {
    fp_t x;
    fp_t y;
  } ec_affine_t;

  typedef struct packed {
    fp_t x;
    fp_t y;
    fp_t z;
  } ec_jac_t;

  // F_p12 element as twelve F_p coefficients, coefficient 11 in the top bits.
  typedef logic [FP12_N-1:0][FP_W-1:0] fp12_t;

  typedef logic [AES_W-1:0] aes_blk_t;

  // Operations of the elliptic-curve point unit.
  typedef enum logic [1:0] {
    EC_ADD = 2'd0,
    EC_DBL = 2'd1,
    EC_AFF = 2'd2
  } ec_op_e;

endpackage
