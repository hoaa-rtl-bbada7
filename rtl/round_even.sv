// round_even: round-to-nearest, ties-to-even requantisation ("Bit Rounding")
// of the accumulator, with the increment done by an HOAA.
//
// The SHIFT low bits of the signed input are dropped (arithmetic shift, so
// the kept part is the floor). The kept part is incremented when the
// dropped part is above one half, or exactly one half and the kept part is
// odd (roundTiesToEven). The increment is not a separate adder pass: the
// kept part goes through an HOAA with b = 0 and comp_en = round_up, whose
// LSB Plus One Adder supplies the +1. With b = 0 the P1A is exact only when
// the kept LSB is 0; for an odd kept part it returns the kept part
// unchanged (the cell's (1,0,0) row), so the result is then one LSB low.
// That is the approximation the paper accepts. The rounded value is then
// saturated to OUT_W bits.
//
// Follows the paper: ties-to-even rounding with the +1 from the HOAA in the
// same cycle. This design's own choices: the widths, and saturation to the
// output width.
//
// Interface: din (IN_W, signed) in; dout (OUT_W, signed), round_up,
// saturated out. Purely combinational. Needs 1 <= SHIFT < IN_W and
// IN_W - SHIFT >= OUT_W.
module round_even #(
  parameter int unsigned IN_W   = 24,
  parameter int unsigned SHIFT  = 2,
  parameter int unsigned OUT_W  = 16,
  parameter int unsigned HOAA_M = 1
) (
  input  logic signed [IN_W-1:0]  din,
  output logic signed [OUT_W-1:0] dout,
  output logic                    round_up,
  output logic                    saturated
);

  localparam int unsigned TW = IN_W - SHIFT;

  if (SHIFT < 1 || SHIFT >= IN_W || TW < OUT_W) begin : g_bad_params
    $error("round_even: needs 1 <= SHIFT < IN_W and IN_W - SHIFT >= OUT_W");
  end

  logic [TW-1:0]   kept, rounded;
  logic [IN_W-1:0] sticky_mask;
  logic            guard, sticky, unused_cout;
  logic            all_same;

  assign kept        = TW'(din >>> SHIFT);
  assign guard       = din[SHIFT-1];
  assign sticky_mask = (IN_W'(1) << (SHIFT - 1)) - IN_W'(1);
  assign sticky      = |(din & sticky_mask);
  assign round_up    = guard & (sticky | kept[0]);

  hoaa #(.WIDTH(TW), .M(HOAA_M)) u_inc (
    .a(kept), .b('0), .cin(1'b0), .comp_en(round_up),
    .sum(rounded), .cout(unused_cout)
  );

  // The value fits when the bits above the output sign bit copy it.
  assign all_same  = (rounded[TW-1:OUT_W-1] == '0) || (&rounded[TW-1:OUT_W-1]);
  assign saturated = !all_same;

  always_comb begin
    if (all_same)            dout = rounded[OUT_W-1:0];
    else if (rounded[TW-1])  dout = {1'b1, {(OUT_W-1){1'b0}}};
    else                     dout = {1'b0, {(OUT_W-1){1'b1}}};
  end

endmodule
