// act_func: configurable sigmoid / tanh activation function.
//
//   hyperbolic CORDIC   (X0, Y0, Z0) -> cosh(z), sinh(z)
//   PG adder 1          e^z     = cosh(z) + sinh(z)
//   PG adder 2          1 + e^z
//   2:1 mux (AF_sel)    numerator   = tanh ? sinh(z) : e^z
//   2:1 mux (AF_sel)    denominator = tanh ? cosh(z) : 1 + e^z
//   divider             f(z) = numerator / denominator
//
// so f = tanh(z) = sinh/cosh or f = sigmoid(z) = e^z / (1 + e^z). The two
// "PG" adders are HOAA instances in their exact (full adder) mode; the
// CORDIC inside uses HOAA subtraction for its micro-rotations.
//
// Follows the paper: the CORDIC, the two adders, the two multiplexers and
// the divider, and the AF_sel choice between sigmoid and tanh. This
// design's own choices: the fixed-point format (W bits signed, FRAC fraction
// bits), af_sel = 1 selecting tanh, the clamp of z0 to the CORDIC
// convergence range |z| <= ZMAX (about 1.117, so f saturates beyond it:
// tanh at +-0.807, sigmoid at 0.246/0.754), the "1" of adder 2 fed as the
// constant operand 1.0 rather than through a P1A (a P1A at the 1.0
// position with b = 0 would drop the increment whenever the integer part of
// e^z is odd), and the start/done handshake.
//
// Interface: start, af_sel, x0, y0, z0 (signed W, FRAC fraction bits) in;
// busy, done (one-cycle pulse), f_out (signed W, FRAC fraction bits) out.
// For sigmoid/tanh the caller sets x0 = 1/K_h and y0 = 0.
// Timing: inputs are captured at the start edge while busy is low; done
// comes LATENCY = ITERS + FRAC + 2 edges later (27 for FRAC = 12).
module act_func
  import hoaa_pkg::*;
#(
  parameter int unsigned W      = 16,
  parameter int unsigned FRAC   = 12,
  parameter int unsigned HOAA_M = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                af_sel,
  input  logic signed [W-1:0] x0,
  input  logic signed [W-1:0] y0,
  input  logic signed [W-1:0] z0,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] f_out
);

  localparam logic signed [W-1:0] ONE  = W'(1) << FRAC;
  localparam logic signed [W-1:0] ZMAX = W'(cordic_zmax(FRAC));

  logic signed [W-1:0] z_cl, cosh_v, sinh_v, ez, one_p_ez, num, den;
  logic                sel_r, c_busy, c_done, d_busy, d_done;
  logic [1:0]          unused_c;

  assign z_cl = (z0 > ZMAX) ? ZMAX : ((z0 < -ZMAX) ? -ZMAX : z0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  sel_r <= 1'b0;
    else if (start && !busy)     sel_r <= af_sel;
  end

  cordic_hyp #(.W(W), .FRAC(FRAC), .HOAA_M(HOAA_M)) u_cordic (
    .clk, .rst_n, .start(start && !busy), .x0, .y0, .z0(z_cl),
    .busy(c_busy), .done(c_done), .cosh_o(cosh_v), .sinh_o(sinh_v)
  );

  // PG adder 1: e^z = cosh + sinh.
  hoaa #(.WIDTH(W), .M(HOAA_M)) u_pg1 (
    .a(cosh_v), .b(sinh_v), .cin(1'b0), .comp_en(1'b0),
    .sum(ez), .cout(unused_c[0])
  );
  // PG adder 2: 1 + e^z.
  hoaa #(.WIDTH(W), .M(HOAA_M)) u_pg2 (
    .a(ez), .b(ONE), .cin(1'b0), .comp_en(1'b0),
    .sum(one_p_ez), .cout(unused_c[1])
  );

  assign num = sel_r ? sinh_v : ez;
  assign den = sel_r ? cosh_v : one_p_ez;

  af_divider #(.W(W), .FRAC(FRAC)) u_div (
    .clk, .rst_n, .start(c_done), .num, .den,
    .busy(d_busy), .done(d_done), .quo(f_out)
  );

  assign busy = c_busy | c_done | d_busy;
  assign done = d_done;

endmodule
