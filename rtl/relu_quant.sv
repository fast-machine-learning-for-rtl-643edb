// relu_quant: quantized ReLU between two fully connected layers.
//
// Maps each signed layer result (IN_W bits, IN_F fractional) to an unsigned
// OUT_W-bit activation with OUT_W fractional bits and no integer bits, so
// the activation lies in [0, 1 - 2^-OUT_W]. Negative inputs give 0, the
// fraction is rounded to nearest (half rounds up) and values at or above
// 1.0 saturate to the largest code. Purely combinational, N lanes wide.
//
// The paper quantizes the ReLU output with zero integer bits and the same
// bit count as the weights; the round-to-nearest and the saturation are this
// design's choice.
module relu_quant #(
  parameter int N     = 8,
  parameter int IN_W  = 16,
  parameter int IN_F  = 6,
  parameter int OUT_W = 5
) (
  input  logic [N-1:0][IN_W-1:0]  d,
  output logic [N-1:0][OUT_W-1:0] q
);

  localparam int SHIFT = IN_F - OUT_W;          // fractional bits dropped
  localparam int EXT_W = IN_W + OUT_W + 2;
  localparam logic [OUT_W-1:0] QMAX = '1;

  typedef logic signed [EXT_W-1:0] ext_t;

  always_comb begin
    for (int n = 0; n < N; n++) begin
      ext_t v;
      v = ext_t'(signed'(d[n]));
      if (SHIFT > 0)      v = (v + (ext_t'(1) <<< (SHIFT - 1))) >>> SHIFT;
      else if (SHIFT < 0) v = v <<< (-SHIFT);
      if (v < 0)                  q[n] = '0;
      else if (v > ext_t'(QMAX))  q[n] = QMAX;
      else                        q[n] = OUT_W'(v);
    end
  end

endmodule
