// tb_snap_mlp_top: end-to-end test of the full-size pulse-parameter network.
//
// The network runs with all parameters at their defaults (5-bit weights,
// biases and activations, 16-bit results, one clock per layer). The test
//   1. loads all 1608 weights and biases through the parameter port,
//   2. streams angles spread over (-pi, pi) at full rate and checks that the
//      first answer comes 10 clocks after its angle and the rest follow one
//      per clock,
//   3. streams more angles with random input gaps and random back-pressure
//      on theta_ready,
//   4. reloads a second parameter set and repeats step 3.
// Every output vector is compared with a reference network computed here in
// 64-bit integers: per layer, bias*2^xf + sum(x*w), floored to 6 fractional
// bits and wrapped to 16 bits; hidden layers then apply
// clamp(round(r/2), 0, 31). Each mechanism (parameter load and reload,
// pipelined overlap, full-rate output, back-pressure stall, ReLU clamping
// at zero and at full scale) is counted and must occur at least once.
module tb_snap_mlp_top;
  import qctl_pkg::*;

  localparam int NL = 10;
  localparam int NODES [NL] = '{8, 8, 8, 8, 8, 8, 16, 16, 16, 32};
  localparam int NPAR = 1608;
  localparam int RU   = 1;            // clocks per layer (REUSE)
  localparam int LAT  = 1 + (NL - 1) * RU;   // the one-input layer never shares

  typedef logic [31:0][15:0] theta_t;

  logic clk = 1'b0;
  logic rst_n;
  logic param_we;
  logic [10:0] param_addr;
  logic [4:0]  param_data;
  logic alpha_valid, alpha_ready, theta_valid, theta_ready;
  logic [15:0] alpha;
  logic [15:0][15:0] theta_i, theta_q;

  snap_mlp_top dut (
    .clk, .rst_n, .param_we, .param_addr, .param_data,
    .alpha_valid, .alpha_ready, .alpha,
    .theta_valid, .theta_ready, .theta_i, .theta_q
  );

  always #5 clk = ~clk;

  int p [NPAR];
  int base [NL + 1];
  int checks = 0, failures = 0;
  int n_load = 0, n_reload = 0, n_overlap = 0, n_fullrate = 0, n_stall = 0;
  int n_relu_zero = 0, n_relu_sat = 0;

  // ---------------- reference network ----------------
  function automatic theta_t net_ref(int a);
    int act [32];
    int nxt [32];
    theta_t th;
    int ni;
    ni = 1;
    act[0] = a;
    for (int k = 0; k < NL; k++) begin
      int xf;
      xf = (k == 0) ? 13 : 5;
      for (int j = 0; j < NODES[k]; j++) begin
        longint acc;
        int r;
        acc = longint'(p[base[k] + ni*NODES[k] + j]) <<< xf;
        for (int i = 0; i < ni; i++) acc += longint'(act[i]) * p[base[k] + j*ni + i];
        acc = acc >>> (xf + 4 - 6);
        r = int'($signed(16'(acc)));
        if (k == NL - 1) th[j] = 16'(r);
        else if (r < 0) begin nxt[j] = 0; n_relu_zero++; end
        else begin
          nxt[j] = (r + 1) >>> 1;
          if (nxt[j] > 31) begin nxt[j] = 31; n_relu_sat++; end
        end
      end
      for (int j = 0; j < NODES[k]; j++) act[j] = nxt[j];
      ni = NODES[k];
    end
    return th;
  endfunction

  // ---------------- stimulus helpers ----------------
  task automatic load_params(int seed_mode);
    // Weights drawn from a narrower range than the full 5-bit code space so
    // that activations stay in the ReLU's linear region often enough for the
    // outputs to depend on the angle; mode 1 uses a wider range than mode 0.
    for (int k = 0; k < NPAR; k++) begin
      int lim;
      lim = (seed_mode == 1) ? 8 : 6;
      p[k] = int'($urandom % (2*lim + 1)) - lim;
    end
    for (int k = 0; k < NPAR; k++) begin
      @(negedge clk);
      param_we   = 1'b1;
      param_addr = 11'(k);
      param_data = 5'(p[k]);
    end
    @(negedge clk);
    param_we = 1'b0;
  endtask

  function automatic logic [15:0] rand_angle();
    // uniform in (-pi, pi), radians with 13 fractional bits
    int lim;
    lim = 25735;                       // floor(pi * 8192)
    return 16'(int'($urandom % (2*lim + 1)) - lim);
  endfunction

  // ---------------- scoreboard ----------------
  theta_t exp_q [$];
  longint acc_cyc [$];
  longint cyc = 0;
  int     in_flight = 0;
  int     n_got = 0;
  longint last_out_cyc = 0;
  bit     check_lat = 1'b0;
  bit     first_lat = 1'b1;
  theta_t held_val;
  bit     held = 1'b0;
  theta_t prev_out;
  int     n_varied = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      if (held) begin
        checks++;
        if (!theta_valid || {theta_q, theta_i} != held_val) begin
          failures++;
          $display("FAIL stalled output changed");
        end
      end
      held     = theta_valid && !theta_ready;
      held_val = {theta_q, theta_i};
      if (held) n_stall++;
      if (in_flight >= 2) n_overlap++;
      if (theta_valid && theta_ready) begin
        theta_t e;
        longint t0;
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          $display("FAIL output with no angle pending");
        end else begin
          e  = exp_q.pop_front();
          t0 = acc_cyc.pop_front();
          if ({theta_q, theta_i} != e) begin
            failures++;
            if (failures < 10) $display("FAIL theta mismatch at output %0d", n_got);
          end
          if (check_lat) begin
            checks++;
            // the first angle meets an empty pipeline; later ones may wait
            // in the unshared first layer for up to RU-1 more clocks
            if ((first_lat && cyc - t0 != LAT) || cyc - t0 > LAT + RU - 1) begin
              failures++;
              $display("FAIL latency %0d, expected %0d", cyc - t0, LAT);
            end
            first_lat = 1'b0;
          end
        end
        if (n_got > 0 && cyc - last_out_cyc == RU) n_fullrate++;
        last_out_cyc = cyc;
        if (n_got > 0 && {theta_q, theta_i} != prev_out) n_varied++;
        prev_out = {theta_q, theta_i};
        n_got++;
        in_flight--;
      end
      if (alpha_valid && alpha_ready) begin
        exp_q.push_back(net_ref(int'($signed(alpha))));
        acc_cyc.push_back(cyc);
        in_flight++;
      end
    end
  end

  task automatic stream(int n, bit gaps, bit bp);
    int sent;
    sent = 0;
    alpha_valid = 1'b0;
    while (sent < n) begin
      @(negedge clk);
      theta_ready = bp ? (($urandom % 3) != 0) : 1'b1;
      // a new angle is offered only once the previous one has been taken
      if (!alpha_valid && (!gaps || ($urandom % 4) != 0)) begin
        alpha_valid = 1'b1;
        alpha       = rand_angle();
      end
      @(posedge clk);
      if (alpha_valid && alpha_ready) begin
        sent++;
        #1 alpha_valid = 1'b0;
      end
    end
    // drain
    while (exp_q.size() > 0) begin
      @(negedge clk);
      theta_ready = bp ? (($urandom % 3) != 0) : 1'b1;
    end
    @(negedge clk);
    theta_ready = 1'b1;
  endtask

  initial begin
    int s;
    s = 0;
    for (int k = 0; k < NL; k++) begin
      base[k] = s;
      s += (k == 0 ? 1 : NODES[k-1]) * NODES[k] + NODES[k];
    end
    base[NL] = s;
    checks++;
    if (s != NPAR || TOTAL_PARAMS != NPAR) begin
      failures++;
      $display("FAIL parameter count %0d / %0d", s, TOTAL_PARAMS);
    end

    param_we = 1'b0; param_addr = '0; param_data = '0;
    alpha_valid = 1'b0; alpha = '0; theta_ready = 1'b1;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    load_params(1);
    n_load++;
    check_lat = 1'b1;
    stream(100, 1'b0, 1'b0);          // full rate, latency checked
    check_lat = 1'b0;
    stream(150, 1'b1, 1'b1);          // gaps and back-pressure
    load_params(0);
    n_reload++;
    stream(150, 1'b1, 1'b1);

    checks += 7;
    if (n_load == 0)      begin failures++; $display("FAIL no parameter load"); end
    if (n_reload == 0)    begin failures++; $display("FAIL no parameter reload"); end
    if (n_overlap == 0)   begin failures++; $display("FAIL pipeline never overlapped"); end
    if (n_fullrate == 0)  begin failures++; $display("FAIL outputs never came at the full rate"); end
    if (n_stall == 0)     begin failures++; $display("FAIL no back-pressure stall"); end
    if (n_relu_zero == 0) begin failures++; $display("FAIL ReLU never clamped at zero"); end
    if (n_relu_sat == 0)  begin failures++; $display("FAIL ReLU never saturated"); end
    checks++;
    if (n_varied < 50) begin failures++; $display("FAIL outputs hardly depend on the angle"); end
    checks++;
    if (n_got != 400) begin failures++; $display("FAIL %0d outputs, expected 400", n_got); end
    $display("mechanisms: load=%0d reload=%0d overlap=%0d fullrate=%0d stall=%0d relu_zero=%0d relu_sat=%0d varied=%0d",
             n_load, n_reload, n_overlap, n_fullrate, n_stall, n_relu_zero, n_relu_sat, n_varied);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
