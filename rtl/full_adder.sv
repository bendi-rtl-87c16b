// full_adder -- one-bit full adder (F-Adder) used by the BPE parallel counter.
// Combinational: sum = a ^ b ^ cin, cout = majority(a, b, cin).
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  assign sum  = a ^ b ^ cin;
  assign cout = (a & b) | (a & cin) | (b & cin);
endmodule
