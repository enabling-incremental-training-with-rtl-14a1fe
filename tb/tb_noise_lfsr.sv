// tb_noise_lfsr: checks the 8-bit noise LFSR against an independent model.
// The model steps the register by the parity of (state & 8'hB8), which is the
// tap set x^8 + x^6 + x^5 + x^4 + 1. The test checks the reset value, every
// value over two full periods, that 'eps' holds while 'step' is low, that
// zero never appears and that the period is exactly 255.
module tb_noise_lfsr;
  import es_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  logic step;
  logic signed [NOISE_W-1:0] eps;
  int checks = 0, failures = 0;

  noise_lfsr #(.SEED(8'h3C)) dut (.clk, .rst_n, .step, .eps);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] model_next(input logic [7:0] s);
    return {s[6:0], ^(s & 8'hB8)};
  endfunction

  initial begin
    logic [7:0] m;
    int period;
    bit seen [256];
    rst_n = 1'b0; step = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++; if (eps !== 8'sh3C) begin failures++; $display("reset value %h", eps); end
    m = 8'h3C;
    period = 0;
    for (int n = 0; n < 510; n++) begin
      step = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (step) m = model_next(m);
      checks++;
      if (8'(eps) !== m) begin failures++; $display("n=%0d eps=%h model=%h", n, eps, m); end
      if (eps == 0) begin failures++; $display("zero state"); end
    end
    // period
    step = 1'b1;
    foreach (seen[i]) seen[i] = 0;
    m = 8'(eps);
    do begin
      seen[8'(eps)] = 1;
      @(posedge clk); #1;
      period++;
    end while (8'(eps) != m && period < 300);
    checks++; if (period != 255) begin failures++; $display("period %0d", period); end
    checks++; if (seen[0]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
