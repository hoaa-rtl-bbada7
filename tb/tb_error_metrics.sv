// tb_error_metrics: Monte Carlo error measurement of the HOAA in its three
// uses, on uniformly distributed random operands.
//
//   Case I   8-bit two's complement subtraction a - b = a + ~b, with the
//            P1A supplying the +1 (hoaa, 8 bits, comp_en = 1).
//   Case II  ties-to-even rounding of a 10-bit value to 8 bits (round_even,
//            whose increment runs through an 8-bit HOAA).
//   Case III sigmoid/tanh of the activation function at its defaults.
//
// For each case the error distance ED = |approximate - exact| is gathered
// and MED (mean ED, in LSB), MSE (mean ED^2, in LSB^2) and MRED (mean
// ED / |exact|, exact != 0) are printed, with MED and MSE also divided by
// 1024 as percentages. For Case I the P1A is wrong exactly when both LSBs
// of a and ~b are 1 and 0 respectively, i.e. for a quarter of the operand
// pairs, each time by one LSB, so MED = MSE = 0.25; for Case II the
// increment is lost for odd kept parts, again a quarter of uniform inputs.
// Both are checked to within Monte Carlo noise. Case III is checked to stay
// within a few LSB of real arithmetic.
module tb_error_metrics;
  localparam int N = 65536;

  logic [7:0]         a1, b1, s1;
  logic               c1;
  logic signed [9:0]  d2;
  logic signed [7:0]  r2;
  logic               up2, sat2;

  logic clk = 0, rst_n = 0, start = 0, af_sel = 0, busy, done;
  logic signed [15:0] z0, f_out;

  int checks = 0, failures = 0;

  hoaa       #(.WIDTH(8)) u_sub (.a(a1), .b(~b1), .cin(1'b0), .comp_en(1'b1), .sum(s1), .cout(c1));
  round_even #(.IN_W(10), .SHIFT(2), .OUT_W(8)) u_rnd (.din(d2), .dout(r2), .round_up(up2), .saturated(sat2));
  act_func   u_af (.clk, .rst_n, .start, .af_sel, .x0(16'sd4946), .y0(16'sd0), .z0, .busy, .done, .f_out);

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic report(input string name, input real sed, input real sed2, input real sre,
                        input int n, input int nre, input real lo, input real hi);
    real med, mse;
    med = sed / n;
    mse = sed2 / n;
    $display("%s: MED=%f LSB MSE=%f LSB^2 MRED=%f%%  MED/1024=%f%% MSE/1024=%f%%",
             name, med, mse, 100.0 * sre / (nre > 0 ? nre : 1), 100.0 * med / 1024.0, 100.0 * mse / 1024.0);
    checks++;
    if (med < lo || med > hi) begin
      failures++;
      $display("FAIL %s MED %f outside [%f, %f]", name, med, lo, hi);
    end
  endtask

  initial begin
    real sed, sed2, sre;
    int  nre, ex, ap, ed, q, rm;
    // Case I
    sed = 0; sed2 = 0; sre = 0; nre = 0;
    for (int i = 0; i < N; i++) begin
      a1 = 8'($urandom); b1 = 8'($urandom);
      #1;
      ex = int'(a1) - int'(b1);            // exact difference, 9-bit signed
      ap = int'($signed({c1 ^ 1'b1, s1})); // borrow-extended result
      ed = ap - ex; if (ed < 0) ed = -ed;
      checks++;
      if (ed > 1) begin failures++; $display("FAIL case I ED %0d", ed); end
      sed += ed; sed2 += ed * ed;
      if (ex != 0) begin sre += real'(ed) / real'(ex < 0 ? -ex : ex); nre++; end
    end
    report("Case I subtraction", sed, sed2, sre, N, nre, 0.23, 0.27);
    // Case II
    sed = 0; sed2 = 0; sre = 0; nre = 0;
    for (int i = 0; i < N; i++) begin
      d2 = 10'($urandom);
      #1;
      q  = int'(d2) >>> 2;
      rm = int'(d2) & 3;
      ex = (rm > 2 || (rm == 2 && (q % 2 != 0))) ? q + 1 : q;
      if (ex > 127) ex = 127;
      ed = int'(r2) - ex; if (ed < 0) ed = -ed;
      checks++;
      if (ed > 1) begin failures++; $display("FAIL case II ED %0d", ed); end
      sed += ed; sed2 += ed * ed;
      if (ex != 0) begin sre += real'(ed) / real'(ex < 0 ? -ex : ex); nre++; end
    end
    report("Case II rounding", sed, sed2, sre, N, nre, 0.23, 0.27);
    // Case III
    sed = 0; sed2 = 0; sre = 0; nre = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 1024; i++) begin
      real zr;
      z0 = 16'(int'($urandom % 9155) - 4577);
      af_sel = 1'(i);
      start = 1;
      @(posedge clk); #1;
      start = 0;
      while (!done) begin @(posedge clk); #1; end
      zr = real'(z0) / 4096.0;
      ex = af_sel ? int'($tanh(zr) * 4096.0) : int'(4096.0 / (1.0 + $exp(-zr)));
      ed = int'(f_out) - ex; if (ed < 0) ed = -ed;
      checks++;
      if (ed > 12) begin failures++; $display("FAIL case III ED %0d", ed); end
      sed += ed; sed2 += ed * ed;
      if (ex != 0) begin sre += real'(ed) / real'(ex < 0 ? -ex : ex); nre++; end
    end
    report("Case III activation", sed, sed2, sre, 1024, nre, 0.0, 6.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
