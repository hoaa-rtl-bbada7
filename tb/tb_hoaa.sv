// tb_hoaa: checks the hybrid adder at its default size (8 bits, one P1A)
// exhaustively and an M = 2 variant on random operands.
//
// comp_en = 0 must give the exact a + b + cin. comp_en = 1 must match the
// bit-serial truth-table model, and stay within one LSB below
// a + b + cin + 1. Also counts how often the approximate mode is exact.
module tb_hoaa;
  import hoaa_ref_pkg::*;

  logic [7:0]  a, b, s;
  logic        cin, comp_en, cout;
  logic [11:0] a2, b2, s2;
  logic        cout2;
  logic [63:0] exp_v;
  int checks = 0, failures = 0, exact_plus1 = 0, low_by_one = 0;

  hoaa dut (.a, .b, .cin, .comp_en, .sum(s), .cout);
  hoaa #(.WIDTH(12), .M(2)) dut2 (.a(a2), .b(b2), .cin, .comp_en, .sum(s2), .cout(cout2));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a2 = '0; b2 = '0;
    for (int m = 0; m < 4; m++) begin
      {comp_en, cin} = 2'(m);
      for (int i = 0; i < 256; i++) begin
        for (int j = 0; j < 256; j++) begin
          a = 8'(i); b = 8'(j);
          #1;
          checks++;
          if (!comp_en) exp_v = 64'(i + j + int'(cin));
          else          exp_v = ref_add(64'(a), 64'(b), cin, 1'b1, 8, 1);
          if ({cout, s} != exp_v[8:0]) begin
            failures++;
            if (failures < 10)
              $display("FAIL a=%0d b=%0d cin=%0b comp_en=%0b got %0d exp %0d",
                       a, b, cin, comp_en, {cout, s}, exp_v[8:0]);
          end
          if (comp_en) begin
            checks++;
            if (int'({cout, s}) == i + j + int'(cin) + 1) exact_plus1++;
            else if (int'({cout, s}) == i + j + int'(cin)) low_by_one++;
            else begin
              failures++;
              $display("FAIL error above one LSB a=%0d b=%0d", a, b);
            end
          end
        end
      end
    end
    // M = 2: two P1A cells, random operands
    for (int n = 0; n < 20000; n++) begin
      a2 = 12'($urandom); b2 = 12'($urandom);
      {comp_en, cin} = 2'($urandom);
      #1;
      checks++;
      exp_v = ref_add(64'(a2), 64'(b2), cin, comp_en, 12, 2);
      if ({cout2, s2} != exp_v[12:0]) begin
        failures++;
        if (failures < 10)
          $display("FAIL M=2 a=%0d b=%0d cin=%0b comp_en=%0b got %0d exp %0d",
                   a2, b2, cin, comp_en, {cout2, s2}, exp_v[12:0]);
      end
    end
    $display("approximate mode: %0d exact +1, %0d one low", exact_plus1, low_by_one);
    checks++;
    if (exact_plus1 == 0 || low_by_one == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
