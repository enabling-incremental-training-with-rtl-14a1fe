// tb_dense_layer: checks the fully connected layer (3 inputs, 2 outputs) with
// random inputs and weights against a model computed with integer
// arithmetic: y = min(15, max(0, sum x*w) / 256). Also checks the one-cycle
// latency and that the training tag and valid travel with the data.
module tb_dense_layer;
  import es_pkg::*;

  localparam int NI = 3;
  localparam int NO = 2;

  logic clk = 1'b0;
  logic rst_n, in_valid, in_train, out_valid, out_train;
  logic [ACT_W-1:0] x [NI];
  logic signed [WEIGHT_W-1:0] theta [NO][NI];
  logic [ACT_W-1:0] yhat [NO];
  int checks = 0, failures = 0, clipped_hi = 0, clipped_lo = 0;

  dense_layer #(.N_IN(NI), .N_OUT(NO)) dut (
    .clk, .rst_n, .in_valid, .in_train, .x, .theta, .out_valid, .out_train, .yhat
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_y [NO];
    bit exp_v, exp_t;
    rst_n = 0; in_valid = 0; in_train = 0;
    foreach (x[i]) x[i] = 0;
    foreach (theta[o, i]) theta[o][i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      in_valid = ($urandom_range(0, 3) != 0);
      in_train = $urandom_range(0, 1);
      foreach (x[i]) x[i] = ACT_W'($urandom());
      foreach (theta[o, i]) theta[o][i] = WEIGHT_W'($urandom()) >>> $urandom_range(0, 4);
      for (int o = 0; o < NO; o++) begin
        int s;
        s = 0;
        for (int i = 0; i < NI; i++) s += int'(x[i]) * int'(theta[o][i]);
        if (s < 0) begin s = 0; clipped_lo++; end
        s = s / 256;
        if (s > 15) begin s = 15; clipped_hi++; end
        if (in_valid) exp_y[o] = s;
      end
      exp_v = in_valid; exp_t = in_valid && in_train;
      @(posedge clk); #1;
      checks++;
      if (out_valid != exp_v || out_train != exp_t) begin failures++; $display("valid/tag wrong"); end
      for (int o = 0; o < NO; o++) begin
        checks++;
        if (int'(yhat[o]) != exp_y[o]) begin failures++; $display("n=%0d o=%0d y=%0d expected %0d", n, o, yhat[o], exp_y[o]); end
      end
    end
    checks++; if (clipped_hi == 0 || clipped_lo == 0) begin failures++; $display("clipping not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
