// parallel_counter -- 8-input ones counter of the BPE.
//
// Turns the 8-bit AND result of a quasi-stochastic BP8 x BP8 multiplication
// into a 4-bit binary count (0..8). It is a carry-save tree of seven one-bit
// adders in three levels, as drawn in the paper:
//   level 1: H-Adder on bits 7,6; F-Adder on bits 5,4,3; F-Adder on bits 2,1,0
//   level 2: F-Adder on the three level-1 sums (its sum is output bit 0),
//            F-Adder on the three level-1 carries (weight 2)
//   level 3: H-Adder on the weight-2 terms (its sum is output bit 1),
//            H-Adder on the weight-4 terms (sum is bit 2, carry is bit 3)
// The number and kind of adders per level and which input bits feed the
// level-1 adders follow the paper's figure; the exact wiring between levels
// is this design's reading of it (the only one that yields a correct count
// with that set of adders and with bit 0 taken from level 2).
//
// Purely combinational.
module parallel_counter (
  input  logic [7:0] bits,
  output logic [3:0] count
);
  logic s76, c76, s543, c543, s210, c210;
  logic s_l2a, c_l2a, s_l2b, c_l2b;
  logic c_l3a;

  // level 1
  half_adder u_ha76  (.a(bits[7]), .b(bits[6]),                .sum(s76),  .cout(c76));
  full_adder u_fa543 (.a(bits[5]), .b(bits[4]), .cin(bits[3]), .sum(s543), .cout(c543));
  full_adder u_fa210 (.a(bits[2]), .b(bits[1]), .cin(bits[0]), .sum(s210), .cout(c210));

  // level 2: sums (weight 1) and carries (weight 2)
  full_adder u_fa_s (.a(s76), .b(s543), .cin(s210), .sum(s_l2a), .cout(c_l2a));
  full_adder u_fa_c (.a(c76), .b(c543), .cin(c210), .sum(s_l2b), .cout(c_l2b));

  // level 3
  half_adder u_ha_w2 (.a(c_l2a), .b(s_l2b), .sum(count[1]), .cout(c_l3a));
  half_adder u_ha_w4 (.a(c_l2b), .b(c_l3a), .sum(count[2]), .cout(count[3]));

  assign count[0] = s_l2a;
endmodule
