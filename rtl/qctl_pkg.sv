// qctl_pkg: shared constants of the SNAP-gate pulse-parameter network.
//
// The network (called random_3 below) is a plain multilayer perceptron that
// takes one SNAP phase angle alpha and returns the 32 quadratic B-spline
// coefficients of the control pulse: 16 for the in-phase drive I(t) and 16 for
// the quadrature drive Q(t). It has ten fully connected layers of
// 8, 8, 8, 8, 8, 8, 16, 16, 16 and 32 nodes; with one input this is 1608
// weights and biases. The layer sizes, the 5-bit quantization and the
// 16-bit result type follow the published model; the parameter address map
// and the number format of the angle input are this design's own choice.
//
// Parameter address map: the 1608 parameters sit in one flat address space,
// layer after layer. Inside layer k, weight w[j][i] (output node j, input i)
// is at param_base(k) + j*layer_inputs(k) + i, and bias b[j] follows all
// weights at param_base(k) + layer_inputs(k)*LAYER_NODES[k] + j.
package qctl_pkg;

  localparam int N_LAYERS  = 10;  // fully connected layers
  localparam int N_INPUTS  = 1;   // the phase angle alpha
  localparam int N_PULSE   = 16;  // B-spline coefficients per quadrature
  localparam int N_OUTPUTS = 2 * N_PULSE;
  localparam int MAX_NODES = 32;  // widest layer

  typedef int layer_arr_t [N_LAYERS];
  localparam layer_arr_t LAYER_NODES = '{8, 8, 8, 8, 8, 8, 16, 16, 16, 32};

  // Default number formats. QBITS is the width of every weight, bias and
  // activation (signed, no integer bits, for weights and biases; unsigned,
  // no integer bits, for activations). RES_W/RES_F is the dense-layer result
  // type: 16 bits, 6 of them fractional. IN_W/IN_F is the angle input in
  // radians, signed, 13 fractional bits (range +-4 covers +-pi).
  localparam int QBITS = 5;
  localparam int RES_W = 16;
  localparam int RES_F = 6;
  localparam int IN_W  = 16;
  localparam int IN_F  = 13;

  function automatic int layer_inputs(int k);
    return (k == 0) ? N_INPUTS : LAYER_NODES[k-1];
  endfunction

  function automatic int layer_params(int k);
    return layer_inputs(k) * LAYER_NODES[k] + LAYER_NODES[k];
  endfunction

  function automatic int param_base(int k);
    int s = 0;
    for (int i = 0; i < k; i++) s += layer_params(i);
    return s;
  endfunction

  localparam int TOTAL_PARAMS = param_base(N_LAYERS);   // 1608
  localparam int PADDR_W      = $clog2(TOTAL_PARAMS);   // 11

endpackage
