// snap_mlp_top: SNAP-gate pulse-parameter network (the distilled random_3 MLP).
//
// Given the phase angle alpha of a Selective Number-dependent Arbitrary
// Phase (SNAP) gate, the network returns the 32 quadratic B-spline
// coefficients of the qubit drive: theta_i[0..15] for the in-phase pulse
// I(t) and theta_q[0..15] for the quadrature pulse Q(t). It is a chain of
// ten mlp_layer stages of 8, 8, 8, 8, 8, 8, 16, 16, 16 and 32 nodes
// (qctl_pkg::LAYER_NODES); the first nine end in a quantized ReLU, the last
// is linear. Weights, biases and activations are QBITS_P bits wide (5 by
// default). The result type of each layer's dense sum is set per layer by
// RES_W_L (total bits) and RES_F_L (fractional bits); all ten default to
// 16 bits with 6 fractional bits, and the last layer's type is that of the
// outputs.
//
// Interfaces:
//   alpha      signed IN_W_P bits, IN_F_P fractional bits, radians; taken when
//              alpha_valid && alpha_ready.
//   theta_i/q  signed RES_W_L[9] bits, RES_F_L[9] fractional bits; valid while
//              theta_valid is high, held until theta_ready.
//   param_*    one weight or bias written per clock at a flat address
//              (map in qctl_pkg), 1608 in all. Load them before use.
//
// Timing: each layer adds REUSE cycles, so with the default REUSE = 1 an
// angle taken at clock edge t gives its coefficients at edge t+10, and one
// angle can be taken every clock (the stages form a pipeline with
// valid/ready between them, so back-pressure at theta_ready stalls it
// without loss). A layer whose input count REUSE does not divide (the
// one-input first layer) runs with REUSE = 1; with REUSE = R > 1 an empty
// pipeline answers in 1 + 9R clocks, takes one angle per R clocks, and a
// loaded one may hold an angle up to R-1 clocks longer in the first layer.
// Hidden stages' raw results and the last stage's (absent) activation are
// left unread on purpose.
//
// From the paper: the layer sizes, one input and 32 outputs, the 5-bit
// quantization with no integer bits, the ReLU activations and the 16-bit
// result type, adjustable layer by layer as in the published flow (whose
// tuned per-layer values are not known, hence the uniform default). This
// design's own: the fixed-point format of alpha, the order of the outputs
// (first 16 in-phase, then 16 quadrature), the runtime parameter bus, the
// handshakes, the pipelining and the REUSE option.
module snap_mlp_top
  import qctl_pkg::*;
#(
  parameter int QBITS_P = QBITS,
  parameter int IN_W_P  = IN_W,
  parameter int IN_F_P  = IN_F,
  // result type of each layer (total and fractional bits), layer 1 first
  parameter layer_arr_t RES_W_L = '{default: RES_W},
  parameter layer_arr_t RES_F_L = '{default: RES_F},
  parameter int REUSE   = 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // parameter load port
  input  logic                              param_we,
  input  logic [PADDR_W-1:0]                param_addr,
  input  logic [QBITS_P-1:0]                param_data,
  // angle in
  input  logic                              alpha_valid,
  output logic                              alpha_ready,
  input  logic [IN_W_P-1:0]                 alpha,
  // pulse parameters out
  output logic                              theta_valid,
  input  logic                              theta_ready,
  output logic [N_PULSE-1:0][RES_W_L[N_LAYERS-1]-1:0] theta_i,
  output logic [N_PULSE-1:0][RES_W_L[N_LAYERS-1]-1:0] theta_q
);

  param_bus_if #(.AW(PADDR_W), .DW(QBITS_P)) pbus ();

  assign pbus.we   = param_we;
  assign pbus.addr = param_addr;
  assign pbus.data = param_data;

  // Handshake and activation signals between the stages. Stage k reads
  // act[k-1] (or alpha for k = 0) and writes act[k].
  logic [N_LAYERS-1:0]                         v;    // stage k out_valid
  logic [N_LAYERS-1:0]                         r;    // stage k out_ready
  logic [N_LAYERS-1:0]                         in_r; // stage k in_ready
  logic [N_LAYERS-1:0][MAX_NODES-1:0][QBITS_P-1:0] act;
  logic [N_OUTPUTS-1:0][RES_W_L[N_LAYERS-1]-1:0] y_last;

  for (genvar k = 0; k < N_LAYERS; k++) begin : g_layer
    localparam int NI    = layer_inputs(k);
    localparam int NO    = LAYER_NODES[k];
    localparam int RU    = (NI % REUSE == 0) ? REUSE : 1;
    localparam bit LAST  = (k == N_LAYERS - 1);
    localparam int RW    = RES_W_L[k];
    localparam int RF    = RES_F_L[k];

    logic [NO-1:0][RW-1:0]      y_res;
    logic [NO-1:0][QBITS_P-1:0] y_act;

    assign r[k] = LAST ? theta_ready : in_r[k+1 < N_LAYERS ? k+1 : k];

    if (k == 0) begin : g_first
      mlp_layer #(
        .N_IN (NI), .N_OUT (NO), .X_W (IN_W_P), .X_F (IN_F_P), .X_SIGNED (1'b1),
        .QBITS (QBITS_P), .RES_W (RW), .RES_F (RF), .REUSE (RU),
        .BASE (param_base(k)), .AW (PADDR_W), .RELU (1'b1)
      ) u_layer (
        .clk (clk), .rst_n (rst_n), .bus (pbus),
        .in_valid (alpha_valid), .in_ready (in_r[k]), .x (alpha),
        .out_valid (v[k]), .out_ready (r[k]), .y_res (y_res), .y_act (y_act)
      );
    end else begin : g_next
      mlp_layer #(
        .N_IN (NI), .N_OUT (NO), .X_W (QBITS_P), .X_F (QBITS_P), .X_SIGNED (1'b0),
        .QBITS (QBITS_P), .RES_W (RW), .RES_F (RF), .REUSE (RU),
        .BASE (param_base(k)), .AW (PADDR_W), .RELU (!LAST)
      ) u_layer (
        .clk (clk), .rst_n (rst_n), .bus (pbus),
        .in_valid (v[k-1]), .in_ready (in_r[k]), .x (act[k-1][NI-1:0]),
        .out_valid (v[k]), .out_ready (r[k]), .y_res (y_res), .y_act (y_act)
      );
    end

    if (LAST) begin : g_out
      assign y_last = y_res;
      assign act[k] = '0;
    end else begin : g_act
      if (NO < MAX_NODES) begin : g_pad
        assign act[k] = {{((MAX_NODES - NO) * QBITS_P){1'b0}}, y_act};
      end else begin : g_full
        assign act[k] = y_act;
      end
    end
  end

  assign alpha_ready = in_r[0];
  assign theta_valid = v[N_LAYERS-1];
  assign theta_i     = y_last[N_PULSE-1:0];
  assign theta_q     = y_last[N_OUTPUTS-1:N_PULSE];

  a_addr : assert property (@(posedge clk) disable iff (!rst_n)
                            param_we |-> int'(param_addr) < TOTAL_PARAMS)
    else $error("snap_mlp_top: parameter address %0d out of range", param_addr);

endmodule
