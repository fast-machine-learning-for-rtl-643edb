// tb_dense_layer: self-checking test of dense_layer.
//
// Three configurations run side by side: a hidden-layer shape (8 unsigned
// 5-bit activations in, 8 results, fully parallel), the same shape sharing
// each multiplier over 4 cycles with a narrow 8-bit result so that the
// wrap-around is exercised, and the first-layer shape (one signed 16-bit
// angle in, 8 results). Each harness streams random vectors with random
// back-pressure and checks values, latency and result holding.
module tb_dense_layer;
  logic clk = 1'b0;
  logic rst_n;
  int   c0, f0, c1, f1, c2, f2, s0, s1, s2;
  logic d0, d1, d2;
  int   checks, failures;

  always #5 clk = ~clk;

  dense_layer_harness #(.N_IN(8), .N_OUT(8), .REUSE(1)) h0 (
    .clk, .rst_n, .checks(c0), .failures(f0), .done(d0), .stalls(s0));
  dense_layer_harness #(.N_IN(8), .N_OUT(4), .REUSE(4), .RES_W(8), .RES_F(8)) h1 (
    .clk, .rst_n, .checks(c1), .failures(f1), .done(d1), .stalls(s1));
  dense_layer_harness #(.N_IN(1), .N_OUT(8), .X_W(16), .X_F(13), .X_SIGNED(1'b1), .REUSE(1)) h2 (
    .clk, .rst_n, .checks(c2), .failures(f2), .done(d2), .stalls(s2));

  initial begin
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (d0 && d1 && d2);
    @(posedge clk);
    checks   = c0 + c1 + c2 + 3;
    failures = f0 + f1 + f2;
    // each configuration must have seen back-pressure
    if (s0 == 0) failures++;
    if (s1 == 0) failures++;
    if (s2 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
