// bpe -- BP9 processing element of a BenDi systolic array (BDSA).
//
// Each cycle the BPE multiplies its stored activation by its stored weight in
// the quasi-stochastic domain and adds the product to the partial sum coming
// from the BPE above:
//   * eight AND gates combine the two BP8 magnitude codes,
//   * one XOR gate forms the product sign from the two sign bits,
//   * the parallel counter turns the eight AND outputs into a 4-bit count,
//   * five XOR gates (the count zero-extended to 5 bits, XORed with the sign)
//     plus an increment by the sign form the two's complement product,
//   * a binary adder adds it to the 16-bit partial sum from above and the
//     result is registered.
// All of this follows the paper. The activation and weight registers feed
// the neighbours: the activation register goes to the next row (the array
// wires it diagonally), the weight register to the BPE below.
//
// Timing: x_in is captured every cycle. w_in is captured only while w_load
// is high (weight stationary), so weights shift down a column one row per
// load cycle. psum_out is registered: it holds psum_in + x_q * w_q, where x_q
// and w_q are the register contents of the previous cycle.
// Reset (active low, synchronous) clears all registers; that is this
// design's choice, the paper does not describe reset.
module bpe
  import bendi_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  // weight path (top to bottom of a column)
  input  logic                     w_load,
  input  bp9_t                     w_in,
  output bp9_t                     w_out,
  // activation path (diagonal)
  input  bp9_t                     x_in,
  output bp9_t                     x_out,
  // partial sums (top to bottom of a column)
  input  logic signed [PSUM_W-1:0] psum_in,
  output logic signed [PSUM_W-1:0] psum_out
);
  bp9_t             x_q, w_q;
  logic [BP_W-1:0]  and_bits;
  logic             prod_sign;
  logic [3:0]       count;
  logic [4:0]       conv;
  logic signed [4:0] prod;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x_q <= '0;
      w_q <= '0;
    end else begin
      x_q <= x_in;
      if (w_load) w_q <= w_in;
    end
  end

  // quasi-stochastic multiplication
  assign and_bits  = x_q.mag & w_q.mag;
  assign prod_sign = x_q.sign ^ w_q.sign;

  parallel_counter u_pc (.bits(and_bits), .count(count));

  // two's complement of a negative count: invert with 5 XORs, then add the sign
  assign conv = {1'b0, count} ^ {5{prod_sign}};
  assign prod = signed'(conv + {4'b0, prod_sign});

  always_ff @(posedge clk) begin
    if (!rst_n) psum_out <= '0;
    else        psum_out <= psum_in + PSUM_W'(prod);
  end

  assign x_out = x_q;
  assign w_out = w_q;
endmodule
