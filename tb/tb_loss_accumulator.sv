// tb_loss_accumulator: checks the loss function accumulator with M = 7
// images of a 3-output layer. Random predictions and labels arrive with
// random gaps; the expected sum of absolute errors is computed in the test.
// Checks the running loss, the image count, that 'done' rises exactly after
// the M-th image, that later images are ignored, that 'clear' restarts it,
// and the saturation at 2^32-1 (reached through a forced preset sum).
module tb_loss_accumulator;
  import es_pkg::*;

  localparam int NO = 3;
  localparam int M  = 7;

  logic clk = 1'b0;
  logic rst_n, clear, valid;
  logic [ACT_W-1:0] yhat [NO];
  logic [ACT_W-1:0] y    [NO];
  logic [ACC_W-1:0] loss;
  logic [$clog2(M+1)-1:0] count;
  logic done;
  int checks = 0, failures = 0;

  loss_accumulator #(.N_OUT(NO), .M_IMAGES(M)) dut (
    .clk, .rst_n, .clear, .valid, .yhat, .y, .loss, .count, .done
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_loss;
    int exp_count;
    rst_n = 0; clear = 0; valid = 0;
    foreach (yhat[j]) begin yhat[j] = 0; y[j] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int member = 0; member < 20; member++) begin
      clear = 1; @(posedge clk); #1 clear = 0;
      exp_loss = 0; exp_count = 0;
      checks++; if (loss != 0 || count != 0 || done) begin failures++; $display("clear failed"); end
      while (exp_count < M + 2) begin
        valid = ($urandom_range(0, 2) != 0);
        foreach (yhat[j]) begin yhat[j] = ACT_W'($urandom()); y[j] = ACT_W'($urandom()); end
        @(posedge clk);
        if (valid && exp_count < M) begin
          for (int j = 0; j < NO; j++)
            exp_loss += (yhat[j] > y[j]) ? (yhat[j] - y[j]) : (y[j] - yhat[j]);
        end
        if (valid) exp_count++;
        #1;
        checks++;
        if (longint'(loss) != exp_loss || int'(count) != ((exp_count < M) ? exp_count : M)) begin
          failures++; $display("loss %0d/%0d count %0d/%0d", loss, exp_loss, count, exp_count);
        end
        checks++;
        if (done != (exp_count >= M)) begin failures++; $display("done=%0d at count %0d", done, exp_count); end
      end
      valid = 0;
    end
    // saturation: preset the sum near the top and add one large error
    clear = 1; @(posedge clk); #1 clear = 0;
    force dut.loss = 32'hFFFF_FFF0;
    #1 release dut.loss;
    valid = 1;
    foreach (yhat[j]) begin yhat[j] = 4'hF; y[j] = 4'h0; end
    @(posedge clk); #1 valid = 0;
    checks++;
    if (loss != 32'hFFFF_FFFF) begin failures++; $display("no saturation: %h", loss); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
