// dense_layer_harness: drives one dense_layer with a random stream and checks it.
//
// Weights and biases are drawn once; NVEC random input vectors are then
// offered with random gaps while out_ready is randomly withheld. Every
// result is compared with a reference computed here in 64-bit integers
// (bias aligned to the product fraction, exact sum, floor to RES_F bits,
// wrap to RES_W bits). The harness also checks that each result appears
// exactly REUSE clock edges after its input was taken and that a result
// held by back-pressure does not change.
module dense_layer_harness #(
  parameter int N_IN     = 8,
  parameter int N_OUT    = 4,
  parameter int X_W      = 5,
  parameter int X_F      = 5,
  parameter bit X_SIGNED = 1'b0,
  parameter int RES_W    = 16,
  parameter int RES_F    = 6,
  parameter int REUSE    = 1,
  parameter int NVEC     = 60
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done,
  output int   stalls
);
  localparam int W_W = 5;
  localparam int W_F = 4;

  typedef logic [N_OUT-1:0][RES_W-1:0] yvec_t;

  logic                           in_valid, in_ready, out_valid, out_ready;
  logic [N_IN-1:0][X_W-1:0]       x;
  logic [N_OUT*N_IN-1:0][W_W-1:0] w;
  logic [N_OUT-1:0][W_W-1:0]      b;
  yvec_t                          y, y_prev;

  dense_layer #(
    .N_IN (N_IN), .N_OUT (N_OUT), .X_W (X_W), .X_F (X_F), .X_SIGNED (X_SIGNED),
    .W_W (W_W), .W_F (W_F), .RES_W (RES_W), .RES_F (RES_F), .REUSE (REUSE)
  ) dut (
    .clk (clk), .rst_n (rst_n), .in_valid (in_valid), .in_ready (in_ready), .x (x),
    .w (w), .b (b), .out_valid (out_valid), .out_ready (out_ready), .y (y)
  );

  function automatic yvec_t reference(logic [N_IN-1:0][X_W-1:0] xv);
    yvec_t r;
    for (int j = 0; j < N_OUT; j++) begin
      longint acc, q, m;
      acc = longint'($signed(b[j])) * (longint'(1) << X_F);
      for (int i = 0; i < N_IN; i++) begin
        longint xi;
        if (X_SIGNED) xi = longint'($signed(xv[i]));
        else          xi = longint'(xv[i]);
        acc += xi * longint'($signed(w[j*N_IN + i]));
      end
      // floor division by 2^(X_F+W_F-RES_F)
      if (X_F + W_F >= RES_F) begin
        m = longint'(1) << (X_F + W_F - RES_F);
        q = acc / m;
        if (acc < 0 && q * m != acc) q -= 1;
      end else begin
        q = acc * (longint'(1) << (RES_F - X_F - W_F));
      end
      r[j] = RES_W'(q);   // two's-complement wrap
    end
    return r;
  endfunction

  yvec_t  exp_q [$];
  longint due_q [$];
  longint cyc;
  int     sent, got;
  bit     took, held;

  initial begin
    checks = 0; failures = 0; done = 1'b0; stalls = 0;
    in_valid = 1'b0; out_ready = 1'b0; x = '0;
    sent = 0; got = 0; cyc = 0; took = 1'b0; held = 1'b0;
    for (int k = 0; k < N_OUT*N_IN; k++) w[k] = W_W'($urandom);
    for (int k = 0; k < N_OUT; k++)      b[k] = W_W'($urandom);
  end

  // Driver: inputs change only on the falling edge; a vector stays on x
  // until it has been taken.
  always @(negedge clk) begin
    if (rst_n) begin
      if (!in_valid || took) begin
        if (sent < NVEC && ($urandom % 4) != 0) begin
          in_valid = 1'b1;
          for (int i = 0; i < N_IN; i++) x[i] = X_W'($urandom);
        end else begin
          in_valid = 1'b0;
        end
      end
      out_ready = (($urandom % 3) != 0);
    end
  end

  // Monitor: samples the handshakes at the rising edge.
  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      // result must be held while stalled
      if (held) begin
        checks++;
        if (!out_valid || y != y_prev) begin
          failures++;
          $display("FAIL dense REUSE=%0d: held result changed or dropped", REUSE);
        end
      end
      held   = out_valid && !out_ready;
      y_prev = y;
      if (held) stalls++;
      // a result is due REUSE edges after its input was taken
      if (due_q.size() > 0 && due_q[0] == cyc) begin
        void'(due_q.pop_front());
        checks++;
        if (!out_valid) begin
          failures++;
          $display("FAIL dense REUSE=%0d: result not valid %0d cycles after input", REUSE, REUSE);
        end
      end
      if (out_valid && out_ready) begin
        yvec_t e;
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          $display("FAIL dense REUSE=%0d: unexpected result", REUSE);
        end else begin
          e = exp_q.pop_front();
          if (y != e) begin
            failures++;
            $display("FAIL dense REUSE=%0d: got %h expected %h", REUSE, y, e);
          end
        end
        got++;
        if (got == NVEC) done = 1'b1;
      end
      took = in_valid && in_ready;
      if (took) begin
        exp_q.push_back(reference(x));
        due_q.push_back(cyc + REUSE);
        sent++;
      end
    end
  end

endmodule
