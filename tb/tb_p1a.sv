// tb_p1a: exhaustive check of the approximate Plus One Adder against its
// truth table, and of where it departs from a+b+cin+1 (exactly the rows
// (1,0,0) and (1,1,1), each one low).
module tb_p1a;
  // {sum, cout} per row a,b,cin = 000 .. 111
  localparam logic [1:0] TABLE_SC [8] = '{2'b10, 2'b01, 2'b01, 2'b11,
                                          2'b10, 2'b11, 2'b11, 2'b11};
  logic a, b, cin, sum, cout;
  int checks = 0, failures = 0, inexact = 0;

  p1a dut (.a, .b, .cin, .sum, .cout);

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
      if ({sum, cout} != TABLE_SC[i]) begin
        failures++;
        $display("FAIL row %0d: sum=%0b cout=%0b", i, sum, cout);
      end
      if (2 * int'(cout) + int'(sum) != int'(a) + int'(b) + int'(cin) + 1) begin
        inexact++;
        checks++;
        if (!(i == 4 || i == 7) || 2 * int'(cout) + int'(sum) != int'(a) + int'(b) + int'(cin)) begin
          failures++;
          $display("FAIL unexpected error on row %0d", i);
        end
      end
    end
    checks++;
    if (inexact != 2) begin
      failures++;
      $display("FAIL %0d inexact rows, expected 2", inexact);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
