// tb_af_divider: checks the fixed-point divider at its defaults (16-bit,
// 12 fraction bits): quo must equal num * 4096 / den truncated toward zero
// for |num| < 2 den, den > 0, and done must come FRAC + 1 = 13 edges after
// the start edge.
module tb_af_divider;
  localparam int LAT = 13;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic signed [15:0] num, den, quo;
  int checks = 0, failures = 0;

  af_divider dut (.clk, .rst_n, .start, .num, .den, .busy, .done, .quo);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n, input int d);
    int cycles, e;
    num = 16'(n); den = 16'(d);
    start = 1;
    @(posedge clk); #1;
    start = 0;
    cycles = 0;
    while (!done) begin
      @(posedge clk); #1;
      cycles++;
    end
    checks++;
    if (cycles != LAT) begin
      failures++;
      $display("FAIL latency %0d", cycles);
    end
    e = (n * 4096) / d;   // SystemVerilog integer division truncates toward zero
    checks++;
    if (int'(quo) != e) begin
      failures++;
      if (failures < 10) $display("FAIL %0d / %0d = %0d, expected %0d", n, d, quo, e);
    end
    @(posedge clk); #1;
  endtask

  initial begin
    num = 0; den = 1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run(0, 4096); run(4095, 4096); run(-4095, 4096); run(2048, 4096); run(4096, 4096);
    run(8191, 4096); run(1, 16383); run(-3000, 6000); run(16000, 16383);
    for (int i = 0; i < 500; i++) begin
      int d, n;
      d = 1 + int'($urandom % 16383);
      n = int'($urandom % (2 * d)) - d + 1;
      run(n, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
