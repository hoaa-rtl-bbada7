// tb_round_even: checks the ties-to-even rounding stage at its defaults
// (24-bit in, 2 bits dropped, 16-bit out).
//
// Reference: floor(din / 4) plus the ties-to-even decision worked out from
// the dropped bits; where an increment is asked for and the kept part is
// odd, the HOAA's P1A keeps the kept part unchanged (its (1,0,0) row), so
// the expected value is the kept part itself. Then saturation to 16 bits.
// Covers directed ties (odd and even), above/below half, negatives,
// saturation both ways, plus random values.
module tb_round_even;
  logic signed [23:0] din;
  logic signed [15:0] dout;
  logic               round_up, saturated;
  int checks = 0, failures = 0;
  int n_up = 0, n_up_odd = 0, n_sat = 0, n_tie = 0;

  round_even dut (.din, .dout, .round_up, .saturated);

  task automatic check(input int v);
    int q, r, e;
    logic up;
    din = 24'(v);
    #1;
    q  = v >>> 2;                 // floor
    r  = v & 3;
    up = (r > 2) || (r == 2 && (q % 2 != 0));
    if (r == 2) n_tie++;
    if (up) begin
      n_up++;
      if (q % 2 != 0) begin
        n_up_odd++;
        e = q;                    // P1A with b = 0 keeps an odd value
      end else e = q + 1;
    end else e = q;
    if (e > 32767)       begin e = 32767;  n_sat++; end
    else if (e < -32768) begin e = -32768; n_sat++; end
    checks++;
    if (int'(dout) != e || round_up != up || saturated != (e != q && (e == 32767 || e == -32768))) begin
      failures++;
      if (failures < 10)
        $display("FAIL din=%0d dout=%0d exp=%0d up=%0b exp_up=%0b sat=%0b", v, dout, e, round_up, up, saturated);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 2.5 -> 2, 3.5 -> 4 (exact would be 4; the P1A keeps 3), 2.75 -> 3
    check(10); check(14); check(11); check(9); check(8); check(13);
    check(-10); check(-14); check(-11); check(-9); check(-6); check(-5);
    check(32767 * 4); check(32767 * 4 + 3); check(32768 * 4); check(-32768 * 4);
    check(-32768 * 4 - 1); check(8388607); check(-8388608);
    for (int i = -2000; i < 2000; i++) check(i);
    for (int i = 0; i < 20000; i++) check(int'(24'($urandom)) << 8 >>> 8);
    $display("ties=%0d round-ups=%0d (odd kept %0d) saturations=%0d", n_tie, n_up, n_up_odd, n_sat);
    checks++;
    if (n_tie == 0 || n_up == 0 || n_up_odd == 0 || n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
