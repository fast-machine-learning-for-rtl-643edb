// tb_param_store: self-checking test of param_store.
//
// A 24-word store at base address 100 sits on an 11-bit parameter bus.
// After reset every word must read zero. Random writes then go to
// addresses 80..139, so that some fall below, some n_in and some above
// the store's range; a model array tracks what the store should hold and
// all words are compared after every write. A final reset must clear all.
module tb_param_store;
  localparam int N  = 24;
  localparam int B  = 100;
  localparam int AW = 11;
  localparam int W  = 5;

  logic clk = 1'b0;
  logic rst_n;
  logic [N-1:0][W-1:0] words;
  logic [W-1:0] model [N];
  int checks = 0, failures = 0, n_in = 0, n_out = 0;

  param_bus_if #(.AW(AW), .DW(W)) bus ();

  param_store #(.N_WORDS(N), .W(W), .AW(AW), .BASE(B)) dut (
    .clk (clk), .rst_n (rst_n), .bus (bus), .words (words));

  always #5 clk = ~clk;

  task automatic compare_all(string what);
    for (int k = 0; k < N; k++) begin
      checks++;
      if (words[k] != model[k]) begin
        failures++;
        $display("FAIL %s: word %0d = %h, expected %h", what, k, words[k], model[k]);
      end
    end
  endtask

  initial begin
    bus.we = 1'b0; bus.addr = '0; bus.data = '0;
    rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int k = 0; k < N; k++) model[k] = '0;
    compare_all("after reset");
    for (int t = 0; t < 400; t++) begin
      int a;
      a = 80 + int'($urandom % 60);
      bus.we   = ($urandom % 5) != 0;
      bus.addr = AW'(a);
      bus.data = W'($urandom);
      @(posedge clk);
      #1;
      if (bus.we && a >= B && a < B + N) begin
        model[a - B] = bus.data;
        n_in++;
      end else if (bus.we) begin
        n_out++;
      end
      compare_all("after write");
    end
    bus.we = 1'b0;
    rst_n = 1'b0;
    @(posedge clk);
    #1 rst_n = 1'b1;
    for (int k = 0; k < N; k++) model[k] = '0;
    compare_all("after second reset");
    checks++;
    if (n_in == 0 || n_out == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
