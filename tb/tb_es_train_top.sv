// tb_es_train_top: end-to-end test of the ES training layer at reduced sizes
// (2x2 layer, P = 2 training blocks, N = 4, K = 3, M = 6). Run 0 trains
// without stalls and checks the exact cycle count; run 1 trains again with
// random inference requests, training-data gaps and pauses of the Training
// signal. Losses, weights and inference results are checked against the
// reference in es_ref_pkg; see es_top_tb_body.svh.
module tb_es_train_top;
  localparam int NI = 2, NO = 2, PB = 2, NPOP = 4, KIT = 3, MIM = 6;
  localparam int RUNS = 2, ITERS_CHECKED = KIT;
  localparam bit LOAD_WEIGHTS = 1;
  localparam int SIGMA_SHIFT = 2, GRAD_SHIFT = 7;

  `include "es_top_tb_body.svh"

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  es_train_top #(.N_IN(NI), .N_OUT(NO), .P(PB), .N_POP(NPOP), .K_ITER(KIT), .M_IMAGES(MIM)) dut (
    .clk, .rst_n, .load_en, .load_addr, .load_data, .train_en, .sigma_shift, .grad_shift,
    .infer_valid, .infer_x, .infer_out_valid, .infer_y,
    .train_ready, .train_img_idx, .train_valid, .train_x, .train_y,
    .busy, .done, .iter, .pop, .group, .last_loss, .weights
  );
endmodule
