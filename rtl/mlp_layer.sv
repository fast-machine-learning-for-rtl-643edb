// mlp_layer: one fully connected stage of the pulse-parameter network.
//
// Bundles the three parts of a layer: param_store (this layer's weights and
// biases, loaded over the shared parameter bus), dense_layer (W x + b, cut
// to the RES_W/RES_F result type) and, when RELU is set, relu_quant (the
// quantized ReLU that produces the QBITS-bit activations fed to the next
// layer). The last layer of the network has no activation and is read at
// y_res.
//
// Parameter layout: this layer owns flat addresses [BASE, BASE+N_IN*N_OUT+
// N_OUT): first weight w[j][i] at BASE + j*N_IN + i, then bias b[j] at
// BASE + N_IN*N_OUT + j. Weights and biases are signed QBITS-bit values with
// QBITS-1 fractional bits (no integer bits).
//
// Timing is that of dense_layer: a vector taken on in_valid & in_ready is
// answered REUSE cycles later on out_valid, held until out_ready; the ReLU
// adds no cycle. Parameters should be written while the layer is idle.
module mlp_layer #(
  parameter int N_IN     = 8,
  parameter int N_OUT    = 8,
  parameter int X_W      = 5,
  parameter int X_F      = 5,
  parameter bit X_SIGNED = 1'b0,
  parameter int QBITS    = 5,
  parameter int RES_W    = 16,
  parameter int RES_F    = 6,
  parameter int REUSE    = 1,
  parameter int BASE     = 0,
  parameter int AW       = 11,
  parameter bit RELU     = 1'b1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  param_bus_if.dst                      bus,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [N_IN-1:0][X_W-1:0]      x,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [N_OUT-1:0][RES_W-1:0]   y_res,
  output logic [N_OUT-1:0][QBITS-1:0]   y_act
);

  localparam int N_W     = N_IN * N_OUT;
  localparam int N_WORDS = N_W + N_OUT;

  logic [N_WORDS-1:0][QBITS-1:0] words;

  param_store #(
    .N_WORDS (N_WORDS),
    .W       (QBITS),
    .AW      (AW),
    .BASE    (BASE)
  ) u_params (
    .clk   (clk),
    .rst_n (rst_n),
    .bus   (bus),
    .words (words)
  );

  dense_layer #(
    .N_IN     (N_IN),
    .N_OUT    (N_OUT),
    .X_W      (X_W),
    .X_F      (X_F),
    .X_SIGNED (X_SIGNED),
    .W_W      (QBITS),
    .W_F      (QBITS - 1),
    .RES_W    (RES_W),
    .RES_F    (RES_F),
    .REUSE    (REUSE)
  ) u_dense (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .x         (x),
    .w         (words[N_W-1:0]),
    .b         (words[N_WORDS-1:N_W]),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .y         (y_res)
  );

  if (RELU) begin : g_relu
    relu_quant #(
      .N     (N_OUT),
      .IN_W  (RES_W),
      .IN_F  (RES_F),
      .OUT_W (QBITS)
    ) u_relu (
      .d (y_res),
      .q (y_act)
    );
  end else begin : g_linear
    // Output layer: the result is taken at y_res; no activation is formed.
    assign y_act = '0;
  end

endmodule
