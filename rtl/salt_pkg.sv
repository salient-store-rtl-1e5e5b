// salt_pkg: constants and types shared by the storage-side FPGA logic.
//
// The lattice constants follow the polynomial multiplier described for the
// design: degree n = 256, 13-bit coefficients, 6-bit signed error samples and
// 18-bit products. The modulus q = 7681 (= 2^13 - 2^9 + 1) is this design's
// choice; it is the 13-bit modulus whose reduction is a shift by 9 and one
// subtraction, which is the shape of the reduction circuit used here.
// The video constants (16x16 blocks, +/-8 search) are also choices of this
// design, sized after the H.264 macroblock.
package salt_pkg;
  // lattice arithmetic
  localparam int unsigned LBC_N  = 256;   // polynomial length
  localparam int unsigned LBC_Q  = 7681;  // modulus
  localparam int unsigned LBC_QW = 13;    // coefficient width
  localparam int unsigned LBC_BW = 6;     // signed-magnitude small coefficient
  localparam int unsigned LBC_PW = 18;    // width of one packed product

  // video
  localparam int unsigned PIX_W  = 8;
  localparam int unsigned MB_BLK = 16;
  localparam int unsigned MB_SR  = 8;

  // signed-magnitude small coefficient: bit BW-1 is the sign
  typedef logic [LBC_BW-1:0] small_t;
  typedef logic [LBC_QW-1:0] coef_t;

  // which ciphertext polynomial a coefficient belongs to
  typedef enum logic {CT_C1 = 1'b0, CT_C2 = 1'b1} ct_sel_e;
endpackage
