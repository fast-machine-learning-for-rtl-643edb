// tb_mlp_layer: self-checking test of one network stage (mlp_layer).
//
// A hidden-layer stage of 8 inputs and 16 nodes at base address 40 is
// loaded with random weights and biases through the parameter bus (with
// writes to neighbouring addresses that it must ignore), then fed random
// 5-bit activation vectors. Both outputs are compared with a reference
// computed here: the 16-bit result (bias*2^5 + sum x*w, floored by 2^3)
// and the ReLU activation (clamp(round(result/2), 0, 31)). The stage uses
// REUSE = 2, so each result must appear 2 edges after its input is taken.
module tb_mlp_layer;
  localparam int NI = 8, NO = 16, Q = 5, BASE = 40, AW = 11, RU = 2;

  logic clk = 1'b0;
  logic rst_n;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [NI-1:0][Q-1:0]  x;
  logic [NO-1:0][15:0]   y_res;
  logic [NO-1:0][Q-1:0]  y_act;
  int   wv [NI*NO];
  int   bv [NO];
  int   checks = 0, failures = 0, n_neg = 0, n_sat = 0;

  param_bus_if #(.AW(AW), .DW(Q)) bus ();

  mlp_layer #(
    .N_IN (NI), .N_OUT (NO), .X_W (Q), .X_F (Q), .X_SIGNED (1'b0), .QBITS (Q),
    .RES_W (16), .RES_F (6), .REUSE (RU), .BASE (BASE), .AW (AW), .RELU (1'b1)
  ) dut (
    .clk (clk), .rst_n (rst_n), .bus (bus), .in_valid (in_valid), .in_ready (in_ready),
    .x (x), .out_valid (out_valid), .out_ready (out_ready), .y_res (y_res), .y_act (y_act)
  );

  always #5 clk = ~clk;

  task automatic write_param(int addr, int val);
    bus.we = 1'b1; bus.addr = AW'(addr); bus.data = Q'(val);
    @(posedge clk); #1;
    bus.we = 1'b0;
  endtask

  initial begin
    bus.we = 1'b0; bus.addr = '0; bus.data = '0;
    in_valid = 1'b0; out_ready = 1'b1; x = '0;
    rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int k = 0; k < NI*NO; k++) wv[k] = int'($urandom % 32) - 16;
    for (int k = 0; k < NO; k++)    bv[k] = int'($urandom % 32) - 16;
    for (int k = 0; k < NI*NO; k++) write_param(BASE + k, wv[k]);
    for (int k = 0; k < NO; k++)    write_param(BASE + NI*NO + k, bv[k]);
    // neighbours of the range must not disturb the stage
    write_param(BASE - 1, 15);
    write_param(BASE + NI*NO + NO, 15);
    for (int t = 0; t < 200; t++) begin
      int xs [NI];
      int lat;
      for (int i = 0; i < NI; i++) begin
        xs[i] = int'($urandom % 32);
        x[i]  = Q'(xs[i]);
      end
      in_valid = 1'b1;
      lat = 0;
      while (!in_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1;          // taken at this edge
      in_valid = 1'b0;
      lat = 1;
      while (!out_valid) begin @(posedge clk); #1; lat++; end
      checks++;
      if (lat != RU) begin
        failures++;
        $display("FAIL latency %0d, expected %0d", lat, RU);
      end
      for (int j = 0; j < NO; j++) begin
        longint acc;
        int r, a;
        acc = longint'(bv[j]) * 32;
        for (int i = 0; i < NI; i++) acc += longint'(xs[i]) * wv[j*NI + i];
        r = int'(acc >>> 3);
        if (r < 0) begin a = 0; n_neg++; end
        else begin
          a = (r + 1) / 2;
          if (a > 31) begin a = 31; n_sat++; end
        end
        checks += 2;
        if (int'($signed(y_res[j])) != r) begin
          failures++;
          $display("FAIL node %0d result %0d expected %0d", j, $signed(y_res[j]), r);
        end
        if (int'(y_act[j]) != a) begin
          failures++;
          $display("FAIL node %0d activation %0d expected %0d", j, y_act[j], a);
        end
      end
      @(posedge clk); #1;          // result read at this edge
    end
    checks++;
    if (n_neg == 0 || n_sat == 0) failures++;
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
