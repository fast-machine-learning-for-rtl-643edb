// tb_relu_quant: exhaustive self-checking test of relu_quant.
//
// Every 16-bit input code is applied to the default lane layout (6 input
// fractional bits down to 5 output bits, a right shift with rounding) and
// to a second instance that widens the fraction (4 input bits to 6 output
// bits, a left shift). Expected codes are computed from the real value:
// q = clamp(round_half_up(d * 2^OUT_W / 2^IN_F), 0, 2^OUT_W - 1).
module tb_relu_quant;
  logic [1:0][15:0] d;
  logic [1:0][4:0]  q5;
  logic [1:0][5:0]  q6;
  int checks = 0, failures = 0;
  int n_zero = 0, n_sat = 0, n_mid = 0;

  relu_quant #(.N(2), .IN_W(16), .IN_F(6), .OUT_W(5)) dut_a (.d(d), .q(q5));
  relu_quant #(.N(2), .IN_W(16), .IN_F(4), .OUT_W(6)) dut_b (.d(d), .q(q6));

  function automatic int expect_q(int v, int in_f, int out_w);
    real x;
    int  r;
    x = real'(v) * (2.0 ** out_w) / (2.0 ** in_f);
    r = $rtoi($floor(x + 0.5));
    if (r < 0) r = 0;
    if (r > (1 << out_w) - 1) r = (1 << out_w) - 1;
    return r;
  endfunction

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      d[0] = 16'(v);
      d[1] = 16'(-v - 1);
      #1;
      for (int n = 0; n < 2; n++) begin
        int sv, ea, eb;
        sv = (n == 0) ? v : -v - 1;
        ea = expect_q(sv, 6, 5);
        eb = expect_q(sv, 4, 6);
        checks += 2;
        if (int'(q5[n]) != ea) begin
          failures++;
          if (failures < 10) $display("FAIL a: d=%0d got %0d exp %0d", sv, q5[n], ea);
        end
        if (int'(q6[n]) != eb) begin
          failures++;
          if (failures < 10) $display("FAIL b: d=%0d got %0d exp %0d", sv, q6[n], eb);
        end
        if (ea == 0) n_zero++; else if (ea == 31) n_sat++; else n_mid++;
      end
    end
    if (n_zero == 0 || n_sat == 0 || n_mid == 0) failures++;
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
