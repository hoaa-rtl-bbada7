// af_divider: sequential fixed-point divider for the activation function,
// f = num / den.
//
// Restoring division, one quotient bit per clock. The remainder starts at
// |num|; the first step gives the integer quotient bit (r >= den), each of
// the following FRAC steps doubles the remainder and subtracts den when it
// fits, giving one fraction bit. The quotient is then negated when num is
// negative. The result is truncated toward zero and exact to 1 LSB for
// |num| < 2*den; the activation function always has |num| < den (|sinh| <
// cosh, e^z < 1 + e^z).
//
// The paper only names a "Division" block after the multiplexers; the
// algorithm, format and handshake here are this design's own. Plain
// subtraction is used, not the HOAA, since the paper puts no +1 there.
//
// Interface: num (signed W), den (W, must be > 0), start in; busy, done
// (one-cycle pulse), quo (signed W, FRAC fraction bits) out.
// Timing: operands are captured at the start edge while busy is low; done
// follows FRAC + 1 edges later and quo holds until the next start.
module af_divider #(
  parameter int unsigned W    = 16,
  parameter int unsigned FRAC = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] num,
  input  logic signed [W-1:0] den,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] quo
);

  localparam int unsigned CW = $clog2(FRAC + 2);

  logic [W+1:0]   r, d, r_try;
  logic [FRAC-1:0] q;
  logic           neg;
  logic [CW-1:0]  cnt;
  logic [W+1:0]   r_cur;
  logic [W-1:0]   num_abs;

  assign num_abs = num[W-1] ? unsigned'(-num) : unsigned'(num);

  // The first step compares r itself, the others 2r.
  assign r_cur = (cnt == '0) ? r : (r << 1);
  assign r_try = r_cur - d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r    <= '0;
      d    <= '0;
      q    <= '0;
      neg  <= 1'b0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      quo  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          r    <= (W+2)'(num_abs);
          d    <= (W+2)'(unsigned'(den));
          neg  <= num[W-1];
          q    <= '0;
          cnt  <= '0;
          busy <= 1'b1;
        end
      end else begin
        if (r_cur >= d) begin
          r <= r_try;
          q <= {q[FRAC-2:0], 1'b1};
        end else begin
          r <= r_cur;
          q <= {q[FRAC-2:0], 1'b0};
        end
        if (cnt == CW'(FRAC)) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= neg ? -W'({q[FRAC-1:0], r_cur >= d})
                      :  W'({q[FRAC-1:0], r_cur >= d});
        end else begin
          cnt <= cnt + CW'(1);
        end
      end
    end
  end

  // The divisor must be positive when a division starts.
  a_den_positive: assert property (@(posedge clk)
    (start && !busy) |-> (den > 0))
    else $error("af_divider: start with den <= 0");

endmodule
