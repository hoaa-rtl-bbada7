// full_adder: conventional 1-bit full adder, the plain cell of the ripple
// carry chain inside the HOAA.
//
//   sum  = a ^ b ^ cin
//   cout = a & b | cin & (a ^ b)
//
// These are the textbook equations the paper lists for its baseline cell.
// Purely combinational: sum and cout follow the inputs in the same cycle.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  logic p;
  assign p    = a ^ b;
  assign sum  = p ^ cin;
  assign cout = (a & b) | (cin & p);
endmodule
