// hoaa_mac: signed multiply-accumulate stage of the HOAA processing engine.
//
// The input activation and the weight are each captured in a register (the
// two "reg" boxes in front of the multiplier), multiplied, and the product
// is added to or subtracted from the accumulator in a single cycle. The
// subtraction is the case the HOAA exists for: acc - p is formed as
// acc + ~p with the adder's LSB cell switched to the Plus One Adder
// (comp_en = sub), so the two's complement "+1" costs no second pass. The
// result is therefore the approximate difference: it can be one LSB below
// the exact one when the P1A hits one of its two inexact input rows.
// The accumulator can be preloaded with a bias.
//
// Follows the paper: reg/reg/Mul/Add-Sub/acc reg structure, bias preload,
// subtraction through the HOAA. This design's own choices: operand and
// accumulator widths, the handshake below, asynchronous active-low reset,
// wrap-around (no saturation) of the accumulator, and the forwarding of the
// registered operands to a neighbouring PE.
//
// Timing: in_data, w_data, sub and in_valid are sampled at a rising edge;
// the product reaches acc at the next edge (two edges from the input to
// acc). bias_load writes bias into acc at the next edge and wins over an
// accumulation landing at the same edge. in_fwd/w_fwd are the operand
// registers, one cycle behind the inputs.
module hoaa_mac #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 24,
  parameter int unsigned HOAA_M = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] in_data,
  input  logic signed [DATA_W-1:0] w_data,
  input  logic                     sub,
  input  logic                     bias_load,
  input  logic signed [ACC_W-1:0]  bias,
  output logic signed [DATA_W-1:0] in_fwd,
  output logic signed [DATA_W-1:0] w_fwd,
  output logic signed [ACC_W-1:0]  acc
);

  logic signed [DATA_W-1:0]   in_r, w_r;
  logic                       v_r, sub_r;
  logic signed [2*DATA_W-1:0] prod;
  logic signed [ACC_W-1:0]    prod_ext, b_op, acc_next;
  logic                       unused_cout;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_r  <= '0;
      w_r   <= '0;
      v_r   <= 1'b0;
      sub_r <= 1'b0;
    end else begin
      in_r  <= in_data;
      w_r   <= w_data;
      v_r   <= in_valid;
      sub_r <= sub;
    end
  end

  assign prod     = in_r * w_r;
  assign prod_ext = ACC_W'(prod);  // sign extension: prod is signed
  assign b_op     = sub_r ? ~prod_ext : prod_ext;

  hoaa #(.WIDTH(ACC_W), .M(HOAA_M)) u_addsub (
    .a(acc), .b(b_op), .cin(1'b0), .comp_en(sub_r),
    .sum(acc_next), .cout(unused_cout)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         acc <= '0;
    else if (bias_load) acc <= bias;
    else if (v_r)       acc <= acc_next;
  end

  assign in_fwd = in_r;
  assign w_fwd  = w_r;

endmodule
