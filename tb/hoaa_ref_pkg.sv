// hoaa_ref_pkg: reference models for the testbenches.
//
// ref_add() is a bit-serial model of the (WIDTH, M) hybrid adder written
// from the approximate Plus One Adder truth table (eight rows, 2-bit
// {cout, sum} output) and plain integer addition for the full adder
// positions; it shares no code with the RTL. The P1A rows are
//   a b cin : 000 001 010 011 100 101 110 111
//   cout,sum: 01  10  10  11  01  11  11  11
package hoaa_ref_pkg;

  localparam logic [1:0] P1A_ROW [8] = '{2'b01, 2'b10, 2'b10, 2'b11,
                                         2'b01, 2'b11, 2'b11, 2'b11};

  // Returns {cout, sum} of a WIDTH-bit hybrid add (WIDTH <= 63).
  function automatic logic [63:0] ref_add(input logic [63:0] a, input logic [63:0] b,
                                          input logic cin, input logic comp_en,
                                          input int width, input int m);
    logic [63:0] res;
    logic        c;
    logic [1:0]  v;
    res = '0;
    c   = cin;
    for (int i = 0; i < width; i++) begin
      if (comp_en && i < m) v = P1A_ROW[{a[i], b[i], c}];
      else                  v = 2'(int'(a[i]) + int'(b[i]) + int'(c));
      res[i] = v[0];
      c      = v[1];
    end
    res[width] = c;
    return res;
  endfunction

endpackage
