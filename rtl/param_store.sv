// param_store: weight and bias registers of one fully connected layer.
//
// Holds N_WORDS signed QBITS-bit values (the layer's weights, then its
// biases) as flip-flops so that all of them feed the multiply-accumulate
// array at once. A write on the parameter bus whose address falls in
// [BASE, BASE+N_WORDS) lands in word addr-BASE at the next rising clock edge;
// other addresses are ignored. Reset (rst_n low, synchronous) clears every
// word to zero. The words are read continuously on `words`.
//
// The paper quantizes weights and biases to a few bits with no integer bits
// but compiles their trained values into the logic. Those values are not
// published, so this design keeps them in writable registers instead; the
// bus and the reset value are this design's choice.
module param_store #(
  parameter int N_WORDS = 16,
  parameter int W       = 5,
  parameter int AW      = 11,
  parameter int BASE    = 0
) (
  input  logic                       clk,
  input  logic                       rst_n,
  param_bus_if.dst                   bus,
  output logic [N_WORDS-1:0][W-1:0]  words
);

  int offset;
  logic hit;

  always_comb begin
    offset = int'(bus.addr) - BASE;
    hit    = bus.we && (offset >= 0) && (offset < N_WORDS);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      words <= '0;
    end else if (hit) begin
      words[offset] <= bus.data;
    end
  end

endmodule
