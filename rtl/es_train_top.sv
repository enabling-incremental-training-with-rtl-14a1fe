// es_train_top: a forward-pass (inference) layer extended with evolution
// strategy (ES) incremental training.
//
// The layer (dense_layer) is the inference engine of the 2x2 example network.
// Training reuses it: for each population member every incremental training
// block draws a noise sample eps, the weight update control logic adds
// sigma*eps to the weights under training and the Training mux feeds those
// perturbed weights to the layer, the M training images are streamed through
// the layer, the loss function accumulator sums the absolute errors against
// the labels, and each training block adds eps times the power-of-two
// quantized negative loss to its gradient sum. After N population members
// the weights of the group are moved by the shifted gradient sums. With P
// training blocks the W = N_IN*N_OUT weights are visited in ceil(W/P) groups;
// one run performs K_ITER iterations over all groups.
//
// Inference always has the layer when it asks: 'infer_valid' with 'infer_x'
// gives 'infer_out_valid' and 'infer_y' one cycle later, computed with the
// unperturbed weights, whether training is running or not. Training images
// are requested one per free cycle: 'train_ready' with 'train_img_idx' asks
// for image m, and the image and its label are taken when 'train_valid' is
// high in the same cycle. Lowering 'train_en' (the Training signal) pauses
// training without losing its state.
//
// Configuration: 'sigma_shift' scales the noise (sigma = 2^-sigma_shift in
// units of the 8-bit sample's LSB), 'grad_shift' is the right shift that
// stands for alpha/(N*sigma*M*N_OUT). The host loads the pre-trained weights
// with 'load_en'/'load_addr'/'load_data' (index o*N_IN + i) before training.
//
// The block structure and the data flow follow the paper's incremental
// training micro-architecture; the handshake, the load port, the weight
// grouping and the status outputs are this design's own.
module es_train_top
  import es_pkg::*;
#(
  parameter int unsigned N_IN     = 2,
  parameter int unsigned N_OUT    = 2,
  parameter int unsigned P        = 1,
  parameter int unsigned N_POP    = 100,
  parameter int unsigned K_ITER   = 100,
  parameter int unsigned M_IMAGES = 10000,
  localparam int unsigned W        = N_IN * N_OUT,
  localparam int unsigned N_GROUPS = (W + P - 1) / P,
  localparam int unsigned AW       = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned GW       = (N_GROUPS > 1) ? $clog2(N_GROUPS) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // pre-trained weight load
  input  logic                       load_en,
  input  logic [AW-1:0]              load_addr,
  input  logic signed [WEIGHT_W-1:0] load_data,
  // training control and configuration
  input  logic                       train_en,
  input  logic [SHAMT_W-1:0]         sigma_shift,
  input  logic [SHAMT_W-1:0]         grad_shift,
  // inference stream
  input  logic                       infer_valid,
  input  logic [ACT_W-1:0]           infer_x [N_IN],
  output logic                       infer_out_valid,
  output logic [ACT_W-1:0]           infer_y [N_OUT],
  // training data stream (from the external training-data store)
  output logic                       train_ready,
  output logic [31:0]                train_img_idx,
  input  logic                       train_valid,
  input  logic [ACT_W-1:0]           train_x [N_IN],
  input  logic [ACT_W-1:0]           train_y [N_OUT],
  // status
  output logic                       busy,
  output logic                       done,
  output logic [31:0]                iter,
  output logic [31:0]                pop,
  output logic [GW-1:0]              group,
  output logic [ACC_W-1:0]           last_loss,
  output logic signed [WEIGHT_W-1:0] weights [W]
);

  // ---------------------------------------------------------------- control
  logic draw, loss_clear, grad_acc, update, training, loss_done;
  logic [ACC_W-1:0] loss;

  es_controller #(
    .N_POP(N_POP), .K_ITER(K_ITER), .M_IMAGES(M_IMAGES), .N_GROUPS(N_GROUPS)
  ) u_ctrl (
    .clk, .rst_n,
    .train_en, .infer_valid, .train_valid, .loss_done,
    .train_ready, .img_idx(train_img_idx),
    .draw, .loss_clear, .grad_acc, .update,
    .group, .pop, .iter, .training, .busy, .done, .state()
  );

  // ------------------------------------------------ incremental training blocks
  logic signed [NOISE_W-1:0] eps  [P];
  logic signed [ACC_W-1:0]   step [P];

  // Block b's noise generator starts at ((165 + 37*b) mod 255) + 1, never 0.
  // An 8-bit LFSR has only 255 states, so with more than 255 blocks some
  // blocks share a seed and draw the same noise sequence.
  for (genvar b = 0; b < P; b++) begin : g_itb
    logic signed [ACC_W-1:0] acc_unused;
    incr_training_block #(
      .SEED(NOISE_W'(((165 + 37 * b) % 255) + 1))
    ) u_itb (
      .clk, .rst_n,
      .draw, .accumulate(grad_acc), .clear(update),
      .loss, .grad_shift,
      .eps(eps[b]), .grad_acc(acc_unused), .step_out(step[b])
    );
  end

  // ------------------------------------------------ weight update control logic
  logic signed [WEIGHT_W-1:0] theta [N_OUT][N_IN];

  weight_update_ctrl #(.N_IN(N_IN), .N_OUT(N_OUT), .P(P)) u_wuc (
    .clk, .rst_n,
    .load_en, .load_addr, .load_data,
    .training, .group, .sigma_shift,
    .eps, .update, .step,
    .theta, .weights
  );

  // ---------------------------------------------------------- forward pass
  logic [ACT_W-1:0] lay_x [N_IN];
  logic             lay_out_valid, lay_out_train;
  logic [ACT_W-1:0] lay_y [N_OUT];
  logic [ACT_W-1:0] label_q [N_OUT];

  always_comb lay_x = infer_valid ? infer_x : train_x;

  dense_layer #(.N_IN(N_IN), .N_OUT(N_OUT)) u_layer (
    .clk, .rst_n,
    .in_valid(infer_valid || training), .in_train(training),
    .x(lay_x), .theta,
    .out_valid(lay_out_valid), .out_train(lay_out_train), .yhat(lay_y)
  );

  // The label travels alongside the one-cycle layer pipeline.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int o = 0; o < N_OUT; o++) label_q[o] <= '0;
    end else if (training) begin
      label_q <= train_y;
    end
  end

  assign infer_out_valid = lay_out_valid && !lay_out_train;
  assign infer_y         = lay_y;

  // ------------------------------------------------ loss function accumulator
  loss_accumulator #(.N_OUT(N_OUT), .M_IMAGES(M_IMAGES)) u_loss (
    .clk, .rst_n,
    .clear(loss_clear), .valid(lay_out_valid && lay_out_train),
    .yhat(lay_y), .y(label_q),
    .loss, .count(), .done(loss_done)
  );

  // Loss of the most recent population member, for observation.
  always_ff @(posedge clk) begin
    if (!rst_n)        last_loss <= '0;
    else if (grad_acc) last_loss <= loss;
  end

endmodule
