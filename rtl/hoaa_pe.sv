// hoaa_pe: processing engine (PE) of a systolic DNN accelerator, built
// around the Hybrid Overestimating Approximate Adder (HOAA).
//
//   in_data -> reg --\
//                     Mul -> Add/Sub (HOAA) -> acc reg (bias) -> Bit Rounding
//   w_data  -> reg --/                                              |
//                                                 PE_out <- AF (sigmoid/tanh)
//
// Three places need a "+1" that would otherwise cost a second adder pass or
// a cycle, and all three get it from an HOAA whose LSB Plus One Adder is
// switched in at run time: the two's complement subtraction of the MAC
// (acc - in*w), the ties-to-even increment of the rounding stage, and the
// subtractions of the CORDIC micro-rotations in the activation function.
//
// Number formats (this design's choice; the paper gives none): in_data and
// w_data are signed Q1.(DATA_W-1), so the product and acc carry
// 2*(DATA_W-1) = 14 fraction bits; the rounding stage drops RND_SHIFT = 2
// of them and saturates to the AF's signed AF_W-bit Q(AF_W-AF_FRAC).AF_FRAC
// format (Q4.12); pe_out is in that same format.
//
// Follows the paper: the block chain and its order (operand registers,
// multiplier, HOAA add/sub, bias-preloaded accumulator, rounding, AF with
// sigmoid/tanh select), and the HOAA at the add/sub, rounding and CORDIC.
// This design's own choices: all widths and formats, the control handshake,
// the forwarding ports (the operand registers passed on to the next PE in
// the array), and asynchronous active-low reset.
//
// Control and timing:
//   in_valid/in_data/w_data/sub  sampled at an edge; acc updated at the next
//                                edge (acc += or -= in_data*w_data).
//   bias_load/bias               acc <= bias at the next edge.
//   af_start/af_sel              when af_busy is low, the rounded acc is
//                                captured and the AF runs; pe_out_valid
//                                pulses AF_LATENCY = 27 edges later (at the
//                                defaults) with pe_out = f(rounded acc).
module hoaa_pe
  import hoaa_pkg::*;
#(
  parameter int unsigned DATA_W  = 8,
  parameter int unsigned ACC_W   = 24,
  parameter int unsigned AF_W    = 16,
  parameter int unsigned AF_FRAC = 12,
  parameter int unsigned HOAA_M  = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // MAC
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] in_data,
  input  logic signed [DATA_W-1:0] w_data,
  input  logic                     sub,
  input  logic                     bias_load,
  input  logic signed [ACC_W-1:0]  bias,
  output logic signed [DATA_W-1:0] in_fwd,
  output logic signed [DATA_W-1:0] w_fwd,
  output logic signed [ACC_W-1:0]  acc,
  // Rounding
  output logic signed [AF_W-1:0]   acc_rounded,
  output logic                     rnd_up,
  output logic                     rnd_sat,
  // Activation function
  input  logic                     af_start,
  input  logic                     af_sel,
  output logic                     af_busy,
  output logic                     pe_out_valid,
  output logic signed [AF_W-1:0]   pe_out
);

  localparam int unsigned RND_SHIFT = 2 * (DATA_W - 1) - AF_FRAC;
  localparam logic signed [AF_W-1:0] X0 = AF_W'(inv_kh_q(AF_FRAC));

  if (2 * (DATA_W - 1) <= AF_FRAC) begin : g_bad_params
    $error("hoaa_pe: the product must carry more fraction bits than the AF format");
  end

  hoaa_mac #(.DATA_W(DATA_W), .ACC_W(ACC_W), .HOAA_M(HOAA_M)) u_mac (
    .clk, .rst_n, .in_valid, .in_data, .w_data, .sub, .bias_load, .bias,
    .in_fwd, .w_fwd, .acc
  );

  round_even #(.IN_W(ACC_W), .SHIFT(RND_SHIFT), .OUT_W(AF_W), .HOAA_M(HOAA_M)) u_round (
    .din(acc), .dout(acc_rounded), .round_up(rnd_up), .saturated(rnd_sat)
  );

  act_func #(.W(AF_W), .FRAC(AF_FRAC), .HOAA_M(HOAA_M)) u_af (
    .clk, .rst_n, .start(af_start), .af_sel,
    .x0(X0), .y0('0), .z0(acc_rounded),
    .busy(af_busy), .done(pe_out_valid), .f_out(pe_out)
  );

endmodule
