// dense_layer: fixed-point fully connected layer y = W x + b.
//
// Each output node j accumulates bias b[j] plus the products x[i]*w[j][i]
// at full precision and is then cut to the layer result type: the fraction
// is truncated to RES_F bits (round toward minus infinity) and the value is
// wrapped to RES_W bits, as an ap_fixed result type does by default.
// Number formats: inputs x are X_W bits with X_F fractional bits, signed or
// unsigned (X_SIGNED); weights and biases are signed W_W bits with W_F
// fractional bits; y is signed RES_W bits with RES_F fractional bits.
// Weight w[j][i] is element j*N_IN+i of `w`.
//
// Area/latency trade-off: REUSE (a divisor of N_IN) sets how many clock
// cycles share each multiplier. The layer has N_OUT*N_IN/REUSE multipliers
// and handles inputs REUSE-way sequentially, N_IN/REUSE at a time.
//
// Timing and handshake (valid/ready): a vector is taken when in_valid and
// in_ready are both high. Its result appears with out_valid exactly REUSE
// clock cycles later and is held, unchanged, until out_ready. in_ready is
// high when the layer is not accumulating and its output register is empty
// or being read, so with REUSE = 1 a new vector is taken every cycle.
// Reset is synchronous, active low.
//
// The paper gives the layer's function (matrix product, bias, ReLU in a
// separate step) and the result type <16,6>, which it describes as 16 bits
// with 6 fractional bits; the truncation, the wrap, the reuse scheme and
// the handshake are this design's choice.
module dense_layer #(
  parameter int N_IN     = 8,
  parameter int N_OUT    = 8,
  parameter int X_W      = 5,
  parameter int X_F      = 5,
  parameter bit X_SIGNED = 1'b0,
  parameter int W_W      = 5,
  parameter int W_F      = 4,
  parameter int RES_W    = 16,
  parameter int RES_F    = 6,
  parameter int REUSE    = 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [N_IN-1:0][X_W-1:0]      x,
  input  logic [N_OUT*N_IN-1:0][W_W-1:0] w,
  input  logic [N_OUT-1:0][W_W-1:0]     b,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [N_OUT-1:0][RES_W-1:0]   y
);

  localparam int CHUNK = N_IN / REUSE;
  localparam int CNT_W = (REUSE > 1) ? $clog2(REUSE) : 1;
  localparam int XE_W  = X_W + 1;                      // input, sign-extended
  localparam int PROD_W = XE_W + W_W;
  localparam int BIAS_W = W_W + X_F;
  localparam int BASE_W = (PROD_W > BIAS_W) ? PROD_W : BIAS_W;
  localparam int ACC_W  = BASE_W + $clog2(N_IN + 1) + 1;
  localparam int ACC_F  = X_F + W_F;
  localparam int SHIFT  = ACC_F - RES_F;

  typedef logic signed [ACC_W-1:0] acc_t;

  logic                          busy;
  logic [CNT_W-1:0]              cnt;
  logic [N_IN-1:0][X_W-1:0]      x_q;
  acc_t                          acc     [N_OUT];
  acc_t                          acc_nxt [N_OUT];
  logic                          accept;

  assign in_ready = !busy && (!out_valid || out_ready);
  assign accept   = in_valid && in_ready;

  function automatic acc_t ext_x(logic [X_W-1:0] v);
    if (X_SIGNED) return acc_t'(signed'(v));
    else          return acc_t'(signed'({1'b0, v}));
  endfunction

  function automatic acc_t ext_w(logic [W_W-1:0] v);
    return acc_t'(signed'(v));
  endfunction

  // One accumulation step: the bias on the first step (taken from the new
  // input), the running sum on later steps (taken from the held input).
  always_comb begin
    for (int j = 0; j < N_OUT; j++) begin
      acc_t s;
      int   idx;
      s = accept ? (ext_w(b[j]) <<< X_F) : acc[j];
      for (int k = 0; k < CHUNK; k++) begin
        if (accept) idx = k;
        else        idx = int'(cnt) * CHUNK + k;
        s = s + (accept ? ext_x(x[idx]) : ext_x(x_q[idx])) * ext_w(w[j*N_IN + idx]);
      end
      acc_nxt[j] = s;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      out_valid <= 1'b0;
      x_q       <= '0;
      for (int j = 0; j < N_OUT; j++) acc[j] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (accept) begin
        acc <= acc_nxt;
        x_q <= x;
        if (REUSE == 1) begin
          out_valid <= 1'b1;
        end else begin
          busy <= 1'b1;
          cnt  <= CNT_W'(1);
        end
      end else if (busy) begin
        acc <= acc_nxt;
        cnt <= cnt + CNT_W'(1);
        if (int'(cnt) == REUSE - 1) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
        end
      end
    end
  end

  // Result type conversion: truncate the fraction, wrap the integer part.
  always_comb begin
    for (int j = 0; j < N_OUT; j++) begin
      if (SHIFT >= 0) y[j] = RES_W'(acc[j] >>> SHIFT);
      else            y[j] = RES_W'(acc[j] <<< (-SHIFT));
    end
  end

  // A result, once offered, stays until it is taken.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
                            out_valid && !out_ready |=> out_valid && $stable(y))
    else $error("dense_layer: result dropped or changed before out_ready");

endmodule
