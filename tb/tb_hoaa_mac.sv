// tb_hoaa_mac: checks the multiply-accumulate stage at its defaults
// (8-bit operands, 24-bit accumulator).
//
// A reference accumulator follows the same stream: bias preloads, products
// added exactly, products subtracted through the bit-level HOAA model
// (acc + ~p with the P1A at the LSB). The accumulator is compared every
// cycle, which also checks the two-edge latency from input to acc; the
// forwarded operands are checked one cycle behind the inputs. Each
// subtraction is also checked to be the exact difference or one below it.
module tb_hoaa_mac;
  import hoaa_ref_pkg::*;

  logic              clk = 0, rst_n = 0;
  logic              in_valid, sub, bias_load;
  logic signed [7:0] in_data, w_data, in_fwd, w_fwd;
  logic signed [23:0] bias, acc;
  int checks = 0, failures = 0, n_sub = 0, n_add = 0, n_bias = 0, n_sub_low = 0;

  // pipeline of the reference: stage 1 = operand register
  logic               v1, s1;
  logic signed [7:0]  i1, w1;
  logic signed [23:0] ref_acc;
  logic [63:0]        r;

  hoaa_mac dut (.clk, .rst_n, .in_valid, .in_data, .w_data, .sub, .bias_load, .bias,
                .in_fwd, .w_fwd, .acc);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p, exact;
    in_valid = 0; sub = 0; bias_load = 0; in_data = 0; w_data = 0; bias = 0;
    v1 = 0; s1 = 0; i1 = 0; w1 = 0; ref_acc = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      // drive new inputs after the edge
      in_valid  = ($urandom % 4) != 0;
      sub       = 1'($urandom);
      in_data   = 8'($urandom);
      w_data    = 8'($urandom);
      bias_load = ($urandom % 50) == 0;
      bias      = 24'(int'($urandom % 200000) - 100000);
      @(posedge clk);
      // reference update for this edge: acc from stage-1 values
      if (bias_load) begin
        ref_acc = bias; n_bias++;
      end else if (v1) begin
        p = int'(i1) * int'(w1);
        if (s1) begin
          r = ref_add(64'(ref_acc), 64'(~24'(p)), 1'b0, 1'b1, 24, 1);
          exact = int'(ref_acc) - p;
          checks++;
          if (24'(r[23:0]) != 24'(exact) && 24'(r[23:0]) != 24'(exact - 1)) begin
            failures++;
            $display("FAIL model subtraction off by more than one");
          end
          if (24'(r[23:0]) != 24'(exact)) n_sub_low++;
          ref_acc = r[23:0];
          n_sub++;
        end else begin
          ref_acc = 24'(int'(ref_acc) + p);
          n_add++;
        end
      end
      v1 = in_valid; s1 = sub; i1 = in_data; w1 = w_data;
      #1;
      checks++;
      if (acc != ref_acc) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d acc=%0d exp=%0d", n, acc, ref_acc);
      end
      checks++;
      if (in_fwd != i1 || w_fwd != w1) begin
        failures++;
        if (failures < 10) $display("FAIL forward cycle %0d", n);
      end
    end
    $display("adds=%0d subs=%0d (one low %0d) bias loads=%0d", n_add, n_sub, n_sub_low, n_bias);
    checks++;
    if (n_add == 0 || n_sub == 0 || n_bias == 0 || n_sub_low == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
