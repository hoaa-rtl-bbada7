// tb_act_func: checks the configurable activation function at its defaults
// (16-bit, 12 fraction bits).
//
// For z in and beyond the CORDIC range, af_sel = 0 must give the logistic
// sigmoid and af_sel = 1 the hyperbolic tangent of z clamped to +-ZMAX,
// within TOL LSBs of real arithmetic. done must come 27 edges after the
// start edge, and a start while busy must be ignored.
module tb_act_func;
  localparam int  LAT  = 27;
  localparam int  TOL  = 12;
  localparam real SCALE = 4096.0;
  localparam logic signed [15:0] INVK = 16'd4946;
  localparam real ZMAX = 4577.0 / 4096.0;

  logic clk = 0, rst_n = 0, start = 0, af_sel = 0, busy, done;
  logic signed [15:0] x0, y0, z0, f_out;
  int checks = 0, failures = 0, worst = 0, n_sig = 0, n_tanh = 0, n_clamp = 0;

  act_func dut (.clk, .rst_n, .start, .af_sel, .x0, .y0, .z0, .busy, .done, .f_out);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int z, input bit sel);
    int  cycles, e, dv;
    real zr;
    z0 = 16'(z); af_sel = sel;
    start = 1;
    @(posedge clk); #1;
    // a second start while busy must not restart it
    z0 = 16'(-z); af_sel = !sel;
    cycles = 0;
    while (!done) begin
      @(posedge clk); #1;
      start = 0;
      cycles++;
    end
    start = 0;
    checks++;
    if (cycles != LAT) begin
      failures++;
      $display("FAIL latency %0d", cycles);
    end
    zr = real'(z) / SCALE;
    if (zr > ZMAX)  begin zr = ZMAX;  n_clamp++; end
    if (zr < -ZMAX) begin zr = -ZMAX; n_clamp++; end
    if (sel) begin e = int'($tanh(zr) * SCALE); n_tanh++; end
    else     begin e = int'(SCALE / (1.0 + $exp(-zr))); n_sig++; end
    dv = int'(f_out) - e;
    if (dv < 0) dv = -dv;
    if (dv > worst) worst = dv;
    checks++;
    if (dv > TOL) begin
      failures++;
      if (failures < 10) $display("FAIL z=%0d sel=%0b f=%0d expected %0d", z, sel, f_out, e);
    end
    @(posedge clk); #1;
  endtask

  initial begin
    x0 = INVK; y0 = 0; z0 = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run(0, 0); run(0, 1); run(4000, 0); run(-4000, 1); run(20000, 0); run(-20000, 1);
    for (int i = 0; i < 300; i++) run(int'($urandom % 12001) - 6000, 1'($urandom));
    $display("sigmoid=%0d tanh=%0d clamped=%0d worst error %0d LSB", n_sig, n_tanh, n_clamp, worst);
    checks++;
    if (n_sig == 0 || n_tanh == 0 || n_clamp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
