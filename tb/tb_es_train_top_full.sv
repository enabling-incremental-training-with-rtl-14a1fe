// tb_es_train_top_full: the ES training layer at its default sizes (2x2
// layer, P = 1, N = 100, K = 100, M = 10000 training images). It takes the
// design through one complete training iteration, i.e. all four weights each
// perturbed by 100 population members evaluated over the 10,000 images and
// then updated (4,000,000 training forward passes), with no stalls, and
// checks every member's loss, every weight update and the pass count against
// the reference in es_ref_pkg.
module tb_es_train_top_full;
  localparam int NI = 2, NO = 2, PB = 1, NPOP = 100, KIT = 100, MIM = 10000;
  localparam int RUNS = 1, ITERS_CHECKED = 1;
  localparam bit LOAD_WEIGHTS = 1;
  localparam int SIGMA_SHIFT = 2, GRAD_SHIFT = 17;

  `include "es_top_tb_body.svh"

  initial begin : watchdog
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  es_train_top dut (
    .clk, .rst_n, .load_en, .load_addr, .load_data, .train_en, .sigma_shift, .grad_shift,
    .infer_valid, .infer_x, .infer_out_valid, .infer_y,
    .train_ready, .train_img_idx, .train_valid, .train_x, .train_y,
    .busy, .done, .iter, .pop, .group, .last_loss, .weights
  );
endmodule
