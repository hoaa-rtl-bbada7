// tb_hoaa_pe: end-to-end test of the processing engine at its default
// parameters (8-bit Q1.7 operands, 24-bit accumulator, Q4.12 activation).
//
// Each of NEURONS rounds: preload a random bias, stream a random number of
// input/weight pairs (some subtracted), then start the activation function
// on the rounded accumulator with a random sigmoid/tanh select. Checked:
//   - acc against a reference accumulator (subtractions through the
//     bit-level HOAA model), every cycle;
//   - the forwarded operands;
//   - acc_rounded against ties-to-even rounding of acc with the P1A
//     increment behaviour and saturation;
//   - pe_out against real sigmoid/tanh of the rounded value (clamped to
//     the CORDIC range), within TOL LSBs, and its 27-edge latency.
// Every mechanism (add, subtract, subtract one LSB low, bias preload,
// rounding increment, increment absorbed by the P1A, rounding saturation,
// sigmoid, tanh, z clamp, start ignored while busy) is counted and must
// occur at least once.
module tb_hoaa_pe;
  import hoaa_ref_pkg::*;

  localparam int  NEURONS = 300;
  localparam int  AF_LAT  = 27;
  localparam int  TOL     = 12;
  localparam real SCALE   = 4096.0;
  localparam real ZMAX    = 4577.0 / 4096.0;

  logic clk = 0, rst_n = 0;
  logic in_valid, sub, bias_load, af_start, af_sel;
  logic signed [7:0]  in_data, w_data, in_fwd, w_fwd;
  logic signed [23:0] bias, acc;
  logic signed [15:0] acc_rounded, pe_out;
  logic rnd_up, rnd_sat, af_busy, pe_out_valid;

  int checks = 0, failures = 0;
  int n_add = 0, n_sub = 0, n_sub_low = 0, n_bias = 0, n_up = 0, n_up_absorbed = 0;
  int n_sat = 0, n_sig = 0, n_tanh = 0, n_clamp = 0, n_ignored = 0, worst = 0;

  logic               v1, s1;
  logic signed [7:0]  i1, w1;
  logic signed [23:0] ref_acc;

  hoaa_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 15) $display("FAIL %s", msg);
  endtask

  // One clock with the given MAC inputs; updates and checks the reference.
  task automatic step(input logic v, input logic s, input logic signed [7:0] x,
                      input logic signed [7:0] w, input logic bl, input logic signed [23:0] bv);
    logic [63:0] r;
    int p, exact;
    in_valid = v; sub = s; in_data = x; w_data = w; bias_load = bl; bias = bv;
    @(posedge clk);
    if (bl) begin
      ref_acc = bv; n_bias++;
    end else if (v1) begin
      p = int'(i1) * int'(w1);
      if (s1) begin
        r = ref_add(64'(ref_acc), 64'(~24'(p)), 1'b0, 1'b1, 24, 1);
        exact = int'(ref_acc) - p;
        if (24'(r[23:0]) != 24'(exact)) n_sub_low++;
        ref_acc = r[23:0];
        n_sub++;
      end else begin
        ref_acc = 24'(int'(ref_acc) + p);
        n_add++;
      end
    end
    v1 = v; s1 = s; i1 = x; w1 = w;
    #1;
    checks++;
    if (acc != ref_acc) fail($sformatf("acc=%0d expected %0d", acc, ref_acc));
    checks++;
    if (in_fwd != i1 || w_fwd != w1) fail("forwarded operands");
  endtask

  // Expected rounded value of the reference accumulator.
  function automatic int exp_round(input int a);
    int q, rm, e;
    q  = a >>> 2;
    rm = a & 3;
    e  = q;
    if (rm > 2 || (rm == 2 && (q % 2 != 0))) e = (q % 2 != 0) ? q : q + 1;
    if (e > 32767)  e = 32767;
    if (e < -32768) e = -32768;
    return e;
  endfunction

  initial begin
    int k, cycles, e, dv, zi;
    real zr;
    logic sel;
    in_valid = 0; sub = 0; bias_load = 0; in_data = 0; w_data = 0; bias = 0;
    af_start = 0; af_sel = 0;
    v1 = 0; s1 = 0; i1 = 0; w1 = 0; ref_acc = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < NEURONS; n++) begin
      // bias: mostly small, sometimes far outside the AF range
      if (n % 10 == 9) step(0, 0, 0, 0, 1, 24'(int'($urandom % 4000000) - 2000000));
      else             step(0, 0, 0, 0, 1, 24'(int'($urandom % 40000) - 20000));
      k = 1 + int'($urandom % 16);
      for (int j = 0; j < k; j++)
        step(($urandom % 5) != 0, 1'($urandom), 8'($urandom), 8'($urandom), 0, 0);
      // let the last product land
      step(0, 0, 0, 0, 0, 0);
      step(0, 0, 0, 0, 0, 0);
      // rounding stage
      e = exp_round(int'(acc));
      checks++;
      if (int'(acc_rounded) != e) fail($sformatf("acc_rounded=%0d expected %0d (acc %0d)", acc_rounded, e, acc));
      if (rnd_up) begin
        n_up++;
        if (((int'(acc) >>> 2) % 2) != 0) n_up_absorbed++;
      end
      if (rnd_sat) n_sat++;
      // activation function
      sel = 1'($urandom);
      zi  = int'(acc_rounded);
      af_sel = sel; af_start = 1;
      @(posedge clk); #1;
      af_sel = !sel;  // a start while busy must be ignored
      cycles = 1;
      if (af_busy) n_ignored++;
      while (!pe_out_valid) begin
        @(posedge clk); #1;
        af_start = 0;
        cycles++;
      end
      af_start = 0;
      checks++;
      if (cycles != AF_LAT + 1)
        fail($sformatf("AF latency %0d, expected %0d", cycles - 1, AF_LAT));
      zr = real'(zi) / SCALE;
      if (zr > ZMAX)  begin zr = ZMAX;  n_clamp++; end
      if (zr < -ZMAX) begin zr = -ZMAX; n_clamp++; end
      if (sel) begin e = int'($tanh(zr) * SCALE); n_tanh++; end
      else     begin e = int'(SCALE / (1.0 + $exp(-zr))); n_sig++; end
      dv = int'(pe_out) - e;
      if (dv < 0) dv = -dv;
      if (dv > worst) worst = dv;
      checks++;
      if (dv > TOL) fail($sformatf("pe_out=%0d expected %0d (z %0d, sel %0b)", pe_out, e, zi, sel));
    end
    $display("add=%0d sub=%0d sub_one_low=%0d bias=%0d round_up=%0d absorbed=%0d sat=%0d",
             n_add, n_sub, n_sub_low, n_bias, n_up, n_up_absorbed, n_sat);
    $display("sigmoid=%0d tanh=%0d clamp=%0d ignored_start=%0d worst AF error %0d LSB",
             n_sig, n_tanh, n_clamp, n_ignored, worst);
    checks++; if (n_add == 0)         fail("no addition");
    checks++; if (n_sub == 0)         fail("no subtraction");
    checks++; if (n_sub_low == 0)     fail("no approximate subtraction");
    checks++; if (n_bias == 0)        fail("no bias preload");
    checks++; if (n_up == 0)          fail("no rounding increment");
    checks++; if (n_up_absorbed == 0) fail("no increment absorbed by the P1A");
    checks++; if (n_sat == 0)         fail("no rounding saturation");
    checks++; if (n_sig == 0)         fail("no sigmoid");
    checks++; if (n_tanh == 0)        fail("no tanh");
    checks++; if (n_clamp == 0)       fail("no z clamp");
    checks++; if (n_ignored == 0)     fail("no start while busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
