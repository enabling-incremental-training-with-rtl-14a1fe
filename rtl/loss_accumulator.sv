// loss_accumulator: the loss function accumulator.
//
// For every training pass that leaves the forward-pass layer it forms the
// absolute error of the prediction against the label, summed over the
// N_OUT outputs, and adds it to a 32-bit accumulator; it counts the images
// it has seen. After M_IMAGES images 'done' is high and 'loss' holds
//   L = sum_{m < M} sum_j |yhat_j(m) - y_j(m)| ,
// which is M*N_OUT times the mean absolute error. The ES fitness is -L; the
// sign is applied downstream and the 1/(M*N_OUT) of the mean is folded into
// the gradient shift, so no divider is needed.
//
// Interface: 'valid' with 'yhat' and 'y' adds one image (ignored once done);
// 'clear' starts a new population member (clear wins over valid). The sum
// saturates at 2^32-1; the counter is just wide enough for M_IMAGES.
// Timing: 'loss', 'count' and 'done' update on the edge
// after 'valid'.
//
// Follows the paper: absolute error (no multiplier), summed over M images in
// a 32-bit accumulator. The saturation and the image counter are this
// design's choices.
module loss_accumulator
  import es_pkg::*;
#(
  parameter int unsigned N_OUT    = 2,
  parameter int unsigned M_IMAGES = 10000,
  localparam int unsigned CNT_W   = $clog2(M_IMAGES + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   valid,
  input  logic [ACT_W-1:0]       yhat [N_OUT],
  input  logic [ACT_W-1:0]       y    [N_OUT],
  output logic [ACC_W-1:0]       loss,
  output logic [CNT_W-1:0]       count,
  output logic                   done
);

  localparam int unsigned EW = ACT_W + $clog2(N_OUT + 1);

  logic [EW-1:0]    err;
  logic [ACC_W:0]   sum;

  always_comb begin
    err = '0;
    for (int j = 0; j < N_OUT; j++) begin
      err += (yhat[j] > y[j]) ? EW'(yhat[j] - y[j]) : EW'(y[j] - yhat[j]);
    end
    sum = {1'b0, loss} + (ACC_W+1)'(err);
  end

  assign done = (count == CNT_W'(M_IMAGES));

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      loss  <= '0;
      count <= '0;
    end else if (valid && !done) begin
      loss  <= sum[ACC_W] ? '1 : sum[ACC_W-1:0];
      count <= count + CNT_W'(1);
    end
  end

endmodule
