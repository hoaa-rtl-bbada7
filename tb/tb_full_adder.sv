// tb_full_adder: exhaustive check of the full adder cell against a+b+cin.
module tb_full_adder;
  logic a, b, cin, sum, cout;
  int checks = 0, failures = 0;

  full_adder dut (.a, .b, .cin, .sum, .cout);

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      {a, b, cin} = 3'(i);
      #1;
      checks++;
      if ({cout, sum} != 2'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL a=%0b b=%0b cin=%0b -> %0b%0b", a, b, cin, cout, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
