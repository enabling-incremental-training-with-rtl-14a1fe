// tb_weight_update_ctrl: checks the weight update control logic for a 2x3
// layer (W = 6) served by P = 4 training blocks, so there are two groups and
// the second one is a partial group of 2. A model weight array is kept in
// the test. Checks loading, the Training mux (theta = w when training is
// low), the noise adder with its sigma shift and saturation, that only the
// weights of the current group are perturbed and updated, and the update
// w += step with saturation.
module tb_weight_update_ctrl;
  import es_pkg::*;

  localparam int NI = 2, NO = 3, PB = 4, WW = NI * NO;

  logic clk = 1'b0;
  logic rst_n, load_en, training, update;
  logic [2:0] load_addr;
  logic signed [WEIGHT_W-1:0] load_data;
  logic [0:0] group;
  logic [SHAMT_W-1:0] sigma_shift;
  logic signed [NOISE_W-1:0] eps [PB];
  logic signed [ACC_W-1:0] step [PB];
  logic signed [WEIGHT_W-1:0] theta [NO][NI];
  logic signed [WEIGHT_W-1:0] weights [WW];
  int checks = 0, failures = 0, sats = 0;

  weight_update_ctrl #(.N_IN(NI), .N_OUT(NO), .P(PB)) dut (
    .clk, .rst_n, .load_en, .load_addr, .load_data, .training, .group,
    .sigma_shift, .eps, .update, .step, .theta, .weights
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat12(input longint v);
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return int'(v);
  endfunction

  initial begin
    int wm [WW];
    rst_n = 0; load_en = 0; training = 0; update = 0; load_addr = 0; load_data = 0;
    group = 0; sigma_shift = 0;
    foreach (eps[b]) begin eps[b] = 0; step[b] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int j = 0; j < WW; j++) begin
      load_en = 1; load_addr = 3'(j); load_data = WEIGHT_W'($urandom());
      wm[j] = int'(load_data);
      @(posedge clk); #1;
    end
    load_en = 0;
    for (int n = 0; n < 2000; n++) begin
      training = $urandom_range(0, 1);
      group = 1'($urandom_range(0, 1));
      sigma_shift = SHAMT_W'($urandom_range(0, 8));
      foreach (eps[b]) eps[b] = NOISE_W'($urandom());
      foreach (step[b]) step[b] = ACC_W'($signed(ACC_W'($urandom())) >>> $urandom_range(14, 31));
      update = ($urandom_range(0, 3) == 0);
      #1;
      for (int o = 0; o < NO; o++) begin
        for (int i = 0; i < NI; i++) begin
          int j, e;
          j = o * NI + i;
          e = wm[j];
          if (training && j / PB == int'(group)) begin
            int nz;
            nz = int'(eps[j % PB]);
            nz = (nz >= 0) ? (nz >> sigma_shift) : -((-nz + (1 << sigma_shift) - 1) >> sigma_shift);
            e = sat12(longint'(wm[j]) + nz);
          end
          checks++;
          if (int'(theta[o][i]) != e) begin failures++; $display("n=%0d theta[%0d][%0d]=%0d expected %0d", n, o, i, theta[o][i], e); end
        end
      end
      @(posedge clk);
      if (update) begin
        for (int j = 0; j < WW; j++) begin
          if (j / PB == int'(group)) begin
            longint v;
            v = longint'(wm[j]) + longint'(step[j % PB]);
            if (v > 2047 || v < -2048) sats++;
            wm[j] = sat12(v);
          end
        end
      end
      #1;
      for (int j = 0; j < WW; j++) begin
        checks++;
        if (int'(weights[j]) != wm[j]) begin failures++; $display("n=%0d w[%0d]=%0d expected %0d", n, j, weights[j], wm[j]); end
      end
    end
    checks++; if (sats == 0) begin failures++; $display("saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
