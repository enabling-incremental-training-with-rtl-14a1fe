// dense_layer: one fully connected layer of the forward-pass (inference)
// datapath, written the way a fully unrolled HLS4ML layer is built.
//
// Every input x_i is multiplied by its weight theta[o][i] in a multiplier of
// its own, the products of each output neuron o are summed, and the sum goes
// through the activation: a quantized ReLU that drops the WFRAC weight
// fraction bits and saturates to the unsigned ACT_W-bit activation range,
//   yhat_o = min(2^ACT_W - 1, max(0, sum_i x_i * theta[o][i]) >> WFRAC).
// The same layer serves inference passes (theta = stored weights) and
// training passes (theta with noise added); 'in_train' travels with the data
// so the result can be routed to the loss accumulator or to the inference
// output.
//
// Interface and timing: inputs are sampled on the clock edge when 'in_valid'
// is high; 'out_valid', 'out_train' and 'yhat' appear one cycle later. A new
// pass can start every cycle (initiation interval 1).
//
// The multiplier/adder/activation structure and the 2x2 default size follow
// the paper's example network. No bias terms are drawn there and none are
// built. The kind of activation (quantized ReLU), the rounding by
// truncation and the one-cycle latency are this design's choices.
module dense_layer
  import es_pkg::*;
#(
  parameter int unsigned N_IN  = 2,
  parameter int unsigned N_OUT = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       in_train,
  input  logic [ACT_W-1:0]           x     [N_IN],
  input  logic signed [WEIGHT_W-1:0] theta [N_OUT][N_IN],
  output logic                       out_valid,
  output logic                       out_train,
  output logic [ACT_W-1:0]           yhat  [N_OUT]
);

  localparam int unsigned PROD_W = ACT_W + WEIGHT_W + 1;
  localparam int unsigned SUM_W  = PROD_W + $clog2(N_IN + 1);
  localparam logic signed [SUM_W-1:0] YMAX = SUM_W'((1 << ACT_W) - 1);

  logic [ACT_W-1:0] act [N_OUT];

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      logic signed [SUM_W-1:0] acc;
      logic signed [SUM_W-1:0] shifted;
      acc = '0;
      for (int i = 0; i < N_IN; i++) begin
        logic signed [SUM_W-1:0] xs;
        logic signed [SUM_W-1:0] ws;
        xs  = signed'(SUM_W'(x[i]));
        ws  = SUM_W'(theta[o][i]);
        acc += xs * ws;
      end
      shifted = acc >>> WFRAC;
      if (acc < 0)            act[o] = '0;
      else if (shifted > YMAX) act[o] = '1;
      else                    act[o] = ACT_W'(shifted);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_train <= 1'b0;
      for (int o = 0; o < N_OUT; o++) yhat[o] <= '0;
    end else begin
      out_valid <= in_valid;
      out_train <= in_valid && in_train;
      if (in_valid) yhat <= act;
    end
  end

endmodule
