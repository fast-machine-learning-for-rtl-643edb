// tb_snap_mlp_workloads: the network at every weight precision evaluated for it.
//
// The published design was synthesized with 4- to 8-bit weights, biases
// and activations (5 bits being the chosen point). This test builds the
// network at each of those widths and drives linearly spaced angle sweeps
// through them: 10,000 angles for the 5-bit network (the size of the
// distillation data set) and 2,000 for the others. Each output is checked
// bit-exactly against an integer reference, and the output vector must
// change at least 10 times along each sweep (neighbouring angles are close,
// so most steps legitimately give the same quantized output).
module tb_snap_mlp_workloads;
  logic clk = 1'b0;
  logic rst_n;
  int   c [6], f [6], v [6], wr [6];
  logic d [6];
  int   checks, failures;

  always #5 clk = ~clk;

  snap_mlp_sweep_harness #(.QB(4), .NANG(2000))  h4 (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .n_varied(v[0]), .n_wrap(wr[0]), .done(d[0]));
  snap_mlp_sweep_harness #(.QB(5), .NANG(10000)) h5 (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .n_varied(v[1]), .n_wrap(wr[1]), .done(d[1]));
  snap_mlp_sweep_harness #(.QB(6), .NANG(2000))  h6 (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .n_varied(v[2]), .n_wrap(wr[2]), .done(d[2]));
  snap_mlp_sweep_harness #(.QB(7), .NANG(2000))  h7 (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .n_varied(v[3]), .n_wrap(wr[3]), .done(d[3]));
  snap_mlp_sweep_harness #(.QB(8), .NANG(2000))  h8 (.clk, .rst_n, .checks(c[4]), .failures(f[4]), .n_varied(v[4]), .n_wrap(wr[4]), .done(d[4]));
  // 7-bit network with result types tuned layer by layer; narrow integer
  // parts in the middle layers make results wrap, which the reference models
  snap_mlp_sweep_harness #(.QB(7), .NANG(2000),
                           .RW('{ 9,  8, 8, 7, 7,  8, 11, 12, 14, 16}),
                           .RF('{ 8,  7, 7, 6, 6,  7,  9,  7,  6,  6}))
    h7t (.clk, .rst_n, .checks(c[5]), .failures(f[5]), .n_varied(v[5]), .n_wrap(wr[5]), .done(d[5]));

  initial begin
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5]);
    @(posedge clk);
    checks = 0; failures = 0;
    for (int k = 0; k < 6; k++) begin
      checks += c[k] + 1;
      failures += f[k];
      $display("%s: %0d outputs checked, %0d failures, %0d changed with the angle",
               k < 5 ? $sformatf("QBITS=%0d", k + 4) : "QBITS=7, per-layer result types",
               c[k], f[k], v[k]);
      if (v[k] < 10) begin
        failures++;
        $display("FAIL sweep %0d: outputs hardly depend on the angle", k);
      end
    end
    checks++;
    if (wr[5] == 0) begin
      failures++;
      $display("FAIL the narrow result types never wrapped");
    end
    $display("result wrap-arounds in the per-layer sweep: %0d", wr[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3] + c[4] + c[5],
             f[0] + f[1] + f[2] + f[3] + f[4] + f[5] + 1);
    $finish;
  end
endmodule
