// tb_incr_training_block: checks one incremental training block against a
// behavioural model of the ES gradient sum.
// The model keeps its own copy of the noise LFSR, computes the quantized
// fitness -2^floor(log2 L) with a loop, multiplies it by eps with a real
// multiplication in 64-bit arithmetic, saturates to 32 bits and divides
// by 2^grad_shift (rounding toward minus infinity). Random sequences of
// draw / accumulate / clear and random losses are applied, including large
// losses that drive the accumulator into saturation.
module tb_incr_training_block;
  import es_pkg::*;

  logic clk = 1'b0;
  logic rst_n, draw, accumulate, clear;
  logic [ACC_W-1:0] loss;
  logic [SHAMT_W-1:0] grad_shift;
  logic signed [NOISE_W-1:0] eps;
  logic signed [ACC_W-1:0] grad_acc, step_out;
  int checks = 0, failures = 0, sat_hits = 0;

  incr_training_block #(.SEED(8'h5A)) dut (
    .clk, .rst_n, .draw, .accumulate, .clear, .loss, .grad_shift,
    .eps, .grad_acc, .step_out
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint fitness(input logic [ACC_W-1:0] l);
    longint p;
    if (l == 0) return 0;
    p = 1;
    while (p * 2 <= longint'(l)) p = p * 2;
    return -p;
  endfunction

  function automatic longint floordiv_pow2(input longint v, input int s);
    longint d;
    d = longint'(1) << s;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  initial begin
    logic [7:0] gen;
    longint eps_m, acc_m;
    rst_n = 1'b0; draw = 0; accumulate = 0; clear = 0; loss = 0; grad_shift = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    gen = 8'h5A; eps_m = 0; acc_m = 0;
    for (int n = 0; n < 3000; n++) begin
      draw       = ($urandom_range(0, 3) == 0);
      accumulate = ($urandom_range(0, 1) == 0);
      clear      = ($urandom_range(0, 40) == 0);
      grad_shift = SHAMT_W'($urandom_range(0, 31));
      loss       = ($urandom_range(0, 9) == 0) ? 32'd0 : (ACC_W'($urandom()) >> $urandom_range(0, 31));
      #1;
      checks++;
      if (longint'(step_out) != floordiv_pow2(acc_m, int'(grad_shift))) begin
        failures++; $display("n=%0d step %0d expected %0d", n, step_out, floordiv_pow2(acc_m, int'(grad_shift)));
      end
      @(posedge clk);
      // model update for this edge
      if (clear) acc_m = 0;
      else if (accumulate) begin
        acc_m = acc_m + eps_m * fitness(loss);
        if (acc_m > 64'sd2147483647) begin acc_m = 64'sd2147483647; sat_hits++; end
        if (acc_m < -64'sd2147483648) begin acc_m = -64'sd2147483648; sat_hits++; end
      end
      if (draw) begin
        eps_m = longint'($signed(gen));
        gen = {gen[6:0], ^(gen & 8'hB8)};
      end
      #1;
      checks++;
      if (longint'(eps) != eps_m) begin failures++; $display("n=%0d eps %0d expected %0d", n, eps, eps_m); end
      checks++;
      if (longint'(grad_acc) != acc_m) begin failures++; $display("n=%0d acc %0d expected %0d", n, grad_acc, acc_m); end
    end
    checks++;
    if (sat_hits == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
