// bendi_pkg -- types and default sizes shared by the BenDi quasi-stochastic
// systolic architecture.
//
// Operands are in the signed Bent-Pyramid format BP9: one sign bit on top of
// an 8-bit BP8 magnitude code. A BP9 x BP9 product is formed with eight AND
// gates on the magnitude codes and one XOR on the signs; the number of ones
// in the AND result (0..8) is the product's magnitude. Partial sums are
// 16-bit two's complement binary numbers.
//
// The array size (16x16), the number of arrays (4), the operand width (9 bits)
// and the partial-sum width (16 bits) follow the paper. The accumulator word
// width and depth, and the host command encoding, are this design's choices.
package bendi_pkg;

  // Paper values
  localparam int unsigned BP_W     = 8;   // BP8 magnitude code width
  localparam int unsigned PSUM_W   = 16;  // partial-sum width inside a BDSA
  localparam int unsigned ARRAY_N  = 16;  // BDSA is ARRAY_N x ARRAY_N BPEs
  localparam int unsigned N_ARRAYS = 4;   // BDSAs in the architecture

  // Design choices (the paper gives no number)
  localparam int unsigned ACC_W     = 24;  // accumulator word width
  localparam int unsigned ACC_DEPTH = 256; // output rows held per accumulator bank

  // Signed Bent-Pyramid operand: sign + BP8 magnitude code.
  typedef struct packed {
    logic            sign;
    logic [BP_W-1:0] mag;
  } bp9_t;

  // Host operations accepted by the interface.
  typedef enum logic [1:0] {
    OP_NOP      = 2'd0,
    OP_LOAD_W   = 2'd1,  // shift one weight row into the selected arrays
    OP_STREAM_X = 2'd2   // present one activation row to the selected arrays
  } op_e;

  // Value of a BP9 x BP9 quasi-stochastic product, for reference models:
  // the signed count of ones in the AND of the two magnitude codes.
  function automatic int bp9_mul(bp9_t a, bp9_t b);
    int cnt;
    cnt = $countones(a.mag & b.mag);
    return (a.sign ^ b.sign) ? -cnt : cnt;
  endfunction

endpackage
