// half_adder -- one-bit half adder (H-Adder) used by the BPE parallel counter.
// Combinational: sum = a ^ b, cout = a & b.
module half_adder (
  input  logic a,
  input  logic b,
  output logic sum,
  output logic cout
);
  assign sum  = a ^ b;
  assign cout = a & b;
endmodule
