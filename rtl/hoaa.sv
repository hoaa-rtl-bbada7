// hoaa: (WIDTH, M) Hybrid Overestimating Approximate Adder.
//
// A WIDTH-bit ripple carry adder in which each of the M least significant
// positions holds both a full adder and an approximate Plus One Adder
// (p1a). The run-time select comp_en picks the cell used at those
// positions:
//
//   comp_en = 0  every position is a full adder: sum = a + b + cin (exact)
//   comp_en = 1  the M LSB positions are P1A cells: each adds an excess one
//                at its own weight, so with M = 1 the result approximates
//                a + b + cin + 1 in the same pass through the chain.
//
// The point of the structure is that the "+1" of a two's complement
// subtraction (a + ~b + 1) or of a rounding increment needs no second adder
// pass and no extra cycle. Which cells are reconfigurable and the FA/P1A
// chain follow the paper; the paper also power-gates the idle P1A, which
// has no logic meaning and is not modelled here (both cells exist and a
// multiplexer chooses). The paper derives comp_en from the operands' MSBs
// with a gate whose function it does not give, so here comp_en is an input
// driven by whoever needs the increment.
//
// Interface: a, b (WIDTH), cin, comp_en in; sum (WIDTH), cout out.
// Purely combinational.
module hoaa #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned M     = 1
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  input  logic             comp_en,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);

  logic [WIDTH:0] c;
  assign c[0] = cin;

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    if (i < M) begin : g_hybrid
      logic fa_s, fa_c, pa_s, pa_c;
      full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(fa_s), .cout(fa_c));
      p1a        u_pa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(pa_s), .cout(pa_c));
      assign sum[i]  = comp_en ? pa_s : fa_s;
      assign c[i+1]  = comp_en ? pa_c : fa_c;
    end else begin : g_fa
      full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(sum[i]), .cout(c[i+1]));
    end
  end

  assign cout = c[WIDTH];

endmodule
