// tb_es_mnist_layer: the ES training layer at the size of the first hidden
// layer of the 4-bit MNIST network the method was evaluated on (784 inputs,
// 200 outputs, 156,800 weights) with P = 1000 training blocks, the largest
// but one of the block counts in the method's area/time table. The schedule
// is shortened to N = 2 members, M = 2 images and one iteration: 157 groups
// (156 full, one of 800 weights), 628 training passes, each weight
// perturbed, evaluated and updated once. Losses, updates and inference
// results are checked against the reference in es_ref_pkg. The weights
// start from their reset value 0, which keeps the simulation short.
module tb_es_mnist_layer;
  localparam int NI = 784, NO = 200, PB = 1000, NPOP = 2, KIT = 1, MIM = 2;
  localparam int RUNS = 1, ITERS_CHECKED = KIT;
  localparam bit LOAD_WEIGHTS = 0;
  localparam int SIGMA_SHIFT = 2, GRAD_SHIFT = 6;

  `include "es_top_tb_body.svh"

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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
