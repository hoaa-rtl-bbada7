// cordic_hyp: iterative hyperbolic CORDIC in rotation mode, with HOAA adders.
//
// Starting from (x0, y0, z0), each micro-rotation k with shift s_k does
//   d    = (z >= 0) ? +1 : -1
//   x   <= x + d * (y >>> s_k)
//   y   <= y + d * (x >>> s_k)
//   z   <= z - d * atanh(2^-s_k)
// over the schedule s = 1, 2, 3, 4, 4, 5, ..., FRAC (iteration 4 repeated,
// and 13 too when FRAC >= 13, as hyperbolic CORDIC needs to converge). After
// the last one x = K_h (x0 cosh z0 + y0 sinh z0) and
// y = K_h (x0 sinh z0 + y0 cosh z0). With x0 = 1/K_h and y0 = 0 the outputs
// are cosh(z0) and sinh(z0), valid for |z0| up to about 1.118.
//
// Every add and subtract goes through an HOAA. A subtraction u - v is
// u + ~v with comp_en = 1, so the two's complement "+1" comes from the
// Plus One Adder in the same cycle; the result may be one LSB low, the
// approximation the paper trades for it.
//
// Follows the paper: hyperbolic CORDIC with X0, Y0, Z0 in and sinh, cosh
// out, iterative, its +1 operations done by the HOAA. This design's own
// choices: fixed-point format (W bits, FRAC fraction bits, signed), one
// micro-rotation per clock, the shift schedule, and the start/done
// handshake.
//
// Timing: start is accepted when busy is low; x0, y0, z0 are captured at
// that edge. The ITERS = FRAC + 1 (+1 more if FRAC >= 13) micro-rotations
// take one edge each; done is a one-cycle pulse after the last one, and
// cosh_o/sinh_o hold the result until the next start.
module cordic_hyp
  import hoaa_pkg::*;
#(
  parameter int unsigned W      = 16,
  parameter int unsigned FRAC   = 12,
  parameter int unsigned HOAA_M = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] x0,
  input  logic signed [W-1:0] y0,
  input  logic signed [W-1:0] z0,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] cosh_o,
  output logic signed [W-1:0] sinh_o
);

  localparam int unsigned ITERS = cordic_iters(FRAC);
  localparam int unsigned KW    = $clog2(ITERS + 1);

  logic signed [W-1:0] x, y, z;
  logic signed [W-1:0] x_sh, y_sh, ang;
  logic signed [W-1:0] x_nx, y_nx, z_nx;
  logic [KW-1:0]       k;
  logic [31:0]         shift;
  logic                d_pos;
  logic [2:0]          unused_c;

  assign shift = 32'(cordic_shift(32'(k)));
  assign x_sh  = x >>> shift;
  assign y_sh  = y >>> shift;
  assign ang   = W'(atanh_q(shift, FRAC));
  assign d_pos = !z[W-1];

  // x + d*y_sh, y + d*x_sh, z - d*ang, each one HOAA pass.
  hoaa #(.WIDTH(W), .M(HOAA_M)) u_x (
    .a(x), .b(d_pos ? y_sh : ~y_sh), .cin(1'b0), .comp_en(!d_pos),
    .sum(x_nx), .cout(unused_c[0])
  );
  hoaa #(.WIDTH(W), .M(HOAA_M)) u_y (
    .a(y), .b(d_pos ? x_sh : ~x_sh), .cin(1'b0), .comp_en(!d_pos),
    .sum(y_nx), .cout(unused_c[1])
  );
  hoaa #(.WIDTH(W), .M(HOAA_M)) u_z (
    .a(z), .b(d_pos ? ~ang : ang), .cin(1'b0), .comp_en(d_pos),
    .sum(z_nx), .cout(unused_c[2])
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x    <= '0;
      y    <= '0;
      z    <= '0;
      k    <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          x    <= x0;
          y    <= y0;
          z    <= z0;
          k    <= '0;
          busy <= 1'b1;
        end
      end else begin
        x <= x_nx;
        y <= y_nx;
        z <= z_nx;
        if (k == KW'(ITERS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          k <= k + KW'(1);
        end
      end
    end
  end

  // done is a single-cycle pulse that only ends a running rotation.
  a_done_idle: assert property (@(posedge clk) done |-> !busy)
    else $error("cordic_hyp: done while busy");

  assign cosh_o = x;
  assign sinh_o = y;

endmodule
