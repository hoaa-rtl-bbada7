// tb_cordic_hyp: checks the hyperbolic CORDIC at its defaults (16-bit,
// 12 fraction bits, 13 micro-rotations).
//
// With x0 = 1/K_h and y0 = 0 the outputs must match cosh(z0) and sinh(z0)
// from real arithmetic to within TOL LSBs (truncation of the shifts plus
// the one-LSB-low subtractions of the HOAA) over the convergence range;
// a second set uses x0 = 0, y0 = 1/K_h, which swaps the two results. done
// must come exactly ITERS edges after the start edge, and busy must be
// high in between.
module tb_cordic_hyp;
  localparam int    FRAC  = 12;
  localparam int    ITERS = 13;
  localparam int    TOL   = 12;
  localparam real   SCALE = 4096.0;
  localparam logic signed [15:0] INVK = 16'd4946;  // round(1.2074971 * 4096)
  localparam int    ZLIM  = 4575;                  // just under 1.1178 * 4096

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic signed [15:0] x0, y0, z0, cosh_o, sinh_o;
  int checks = 0, failures = 0, worst = 0;

  cordic_hyp dut (.clk, .rst_n, .start, .x0, .y0, .z0, .busy, .done, .cosh_o, .sinh_o);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int z, input bit swap);
    int   cycles, ec, es, dc, ds;
    real  zr;
    x0 = swap ? 16'sd0 : INVK;
    y0 = swap ? INVK : 16'sd0;
    z0 = 16'(z);
    start = 1;
    @(posedge clk); #1;
    start = 0;
    cycles = 0;
    while (!done) begin
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low while running"); end
      @(posedge clk); #1;
      cycles++;
    end
    checks++;
    if (cycles != ITERS) begin
      failures++;
      $display("FAIL latency %0d, expected %0d", cycles, ITERS);
    end
    zr = real'(z) / SCALE;
    ec = int'($cosh(zr) * SCALE);
    es = int'($sinh(zr) * SCALE);
    dc = (swap ? int'(sinh_o) : int'(cosh_o)) - ec;
    ds = (swap ? int'(cosh_o) : int'(sinh_o)) - es;
    if (dc < 0) dc = -dc;
    if (ds < 0) ds = -ds;
    if (dc > worst) worst = dc;
    if (ds > worst) worst = ds;
    checks++;
    if (dc > TOL || ds > TOL) begin
      failures++;
      if (failures < 10)
        $display("FAIL z=%0d cosh=%0d exp %0d sinh=%0d exp %0d", z, cosh_o, ec, sinh_o, es);
    end
    @(posedge clk); #1;
  endtask

  initial begin
    x0 = 0; y0 = 0; z0 = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run(0, 0); run(ZLIM, 0); run(-ZLIM, 0); run(1, 0); run(-1, 0); run(2048, 0);
    for (int i = 0; i < 400; i++) run(int'($urandom % (2 * ZLIM + 1)) - ZLIM, 0);
    for (int i = 0; i < 100; i++) run(int'($urandom % (2 * ZLIM + 1)) - ZLIM, 1);
    $display("worst error %0d LSB", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
