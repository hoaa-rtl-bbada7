// p1a: approximate Plus One Adder cell.
//
// The cell stands in for a full adder that also adds an excess one, i.e. it
// approximates {cout, sum} = a + b + cin + 1 with two output bits:
//
//   sum  = a | ~(b ^ cin)
//   cout = b | cin
//
// Three gates (XNOR, OR, OR) instead of the five of a full adder. The
// equations are the paper's approximate P1A. Six of the eight input rows are
// exact; for (a,b,cin) = (1,0,0) it gives 1 instead of 2, and for (1,1,1)
// it gives 3 instead of 4 (a 2-bit output cannot hold 4). Both errors are
// -1 in units of the cell's weight. Combinational, no timing of its own.
module p1a (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  assign sum  = a | ~(b ^ cin);
  assign cout = b | cin;
endmodule
