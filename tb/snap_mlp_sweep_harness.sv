// snap_mlp_sweep_harness: runs an angle sweep through one network instance.
//
// Builds snap_mlp_top with QB-bit weights, biases and activations, loads
// 1608 random parameters (drawn from about 3/8 of the code range so that the
// outputs depend on the angle), then offers NANG angles linearly spaced over
// [-pi, pi] back to back, with theta_ready withheld on roughly one clock in
// eight. Every output is compared with an integer reference network for the
// same QB: weights with QB-1 fractional bits, activations with QB fractional
// bits, results floored to RF[k] fractional bits and wrapped to RW[k] bits,
// and a ReLU that rounds half up (or shifts left when QB > RF[k]) and
// saturates.
module snap_mlp_sweep_harness
  import qctl_pkg::*;
#(
  parameter int QB   = 5,
  parameter int NANG = 1000,
  // per-layer result types; the last layer must stay 16 bits wide
  parameter layer_arr_t RW = '{default: 16},
  parameter layer_arr_t RF = '{default: 6}
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   n_varied,
  output int   n_wrap,
  output logic done
);
  localparam int NL   = 10;
  localparam int NODES [NL] = '{8, 8, 8, 8, 8, 8, 16, 16, 16, 32};
  localparam int NPAR = 1608;
  localparam int AF   = QB;          // activation fractional bits
  localparam int WF   = QB - 1;      // weight fractional bits

  typedef logic [31:0][15:0] theta_t;

  logic        param_we;
  logic [10:0] param_addr;
  logic [QB-1:0] param_data;
  logic alpha_valid, alpha_ready, theta_valid, theta_ready;
  logic [15:0] alpha;
  logic [15:0][15:0] theta_i, theta_q;

  snap_mlp_top #(.QBITS_P(QB), .RES_W_L(RW), .RES_F_L(RF)) dut (
    .clk, .rst_n, .param_we, .param_addr, .param_data,
    .alpha_valid, .alpha_ready, .alpha,
    .theta_valid, .theta_ready, .theta_i, .theta_q
  );

  int p [NPAR];
  int base [NL];

  function automatic theta_t net_ref(int a);
    int act [32];
    int nxt [32];
    theta_t th;
    int ni;
    ni = 1;
    act[0] = a;
    for (int k = 0; k < NL; k++) begin
      int xf, sh;
      xf = (k == 0) ? 13 : AF;
      sh = xf + WF - RF[k];
      for (int j = 0; j < NODES[k]; j++) begin
        longint acc;
        int r;
        acc = longint'(p[base[k] + ni*NODES[k] + j]) <<< xf;
        for (int i = 0; i < ni; i++) acc += longint'(act[i]) * p[base[k] + j*ni + i];
        if (sh >= 0) acc = acc >>> sh;
        else         acc = acc <<< (-sh);
        // keep RW[k] bits, sign-extend: two's-complement wrap
        r = int'(acc & ((longint'(1) << RW[k]) - 1));
        if (r >= (1 << (RW[k] - 1))) r -= (1 << RW[k]);
        if (longint'(r) != acc) n_wrap++;
        if (k == NL - 1) th[j] = 16'(r);
        else begin
          int v;
          if (r < 0)       v = 0;
          else if (AF < RF[k]) v = (r + (1 << (RF[k] - AF - 1))) >>> (RF[k] - AF);
          else                 v = r <<< (AF - RF[k]);
          if (v > (1 << AF) - 1) v = (1 << AF) - 1;
          nxt[j] = v;
        end
      end
      for (int j = 0; j < NODES[k]; j++) act[j] = nxt[j];
      ni = NODES[k];
    end
    return th;
  endfunction

  theta_t exp_q [$];
  theta_t prev;
  int     got;

  initial begin
    int s, lim, sent;
    checks = 0; failures = 0; n_varied = 0; n_wrap = 0; done = 1'b0; got = 0;
    param_we = 1'b0; param_addr = '0; param_data = '0;
    alpha_valid = 1'b0; alpha = '0; theta_ready = 1'b1;
    s = 0;
    for (int k = 0; k < NL; k++) begin
      base[k] = s;
      s += (k == 0 ? 1 : NODES[k-1]) * NODES[k] + NODES[k];
    end
    lim = (3 << QB) / 8;
    for (int k = 0; k < NPAR; k++) p[k] = int'($urandom % (2*lim + 1)) - lim;
    wait (rst_n);
    for (int k = 0; k < NPAR; k++) begin
      @(negedge clk);
      param_we = 1'b1; param_addr = 11'(k); param_data = QB'(p[k]);
    end
    @(negedge clk);
    param_we = 1'b0;
    sent = 0;
    while (sent < NANG) begin
      @(negedge clk);
      theta_ready = ($urandom % 8) != 0;
      if (!alpha_valid) begin
        // linearly spaced over [-pi, pi]; 25735 = floor(pi * 2^13)
        alpha_valid = 1'b1;
        alpha = 16'(-25735 + (2 * 25735 * sent) / (NANG - 1));
      end
      @(posedge clk);
      if (alpha_valid && alpha_ready) begin
        sent++;
        #1 alpha_valid = 1'b0;
      end
    end
    while (got < NANG) begin
      @(negedge clk);
      theta_ready = 1'b1;
    end
    done = 1'b1;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (theta_valid && theta_ready) begin
        theta_t e;
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
        end else begin
          e = exp_q.pop_front();
          if ({theta_q, theta_i} != e) begin
            failures++;
            if (failures < 5) $display("FAIL QB=%0d output %0d mismatch", QB, got);
          end
        end
        if (got > 0 && {theta_q, theta_i} != prev) n_varied++;
        prev = {theta_q, theta_i};
        got++;
      end
      if (alpha_valid && alpha_ready) exp_q.push_back(net_ref(int'($signed(alpha))));
    end
  end
endmodule
