// incr_training_block: one incremental training block (one weight at a time).
//
// It holds the noise sample epsilon of the current population member,
// multiplies it by the power-of-two quantized fitness of that member with a
// shift, sums the products over the N population members in a 32-bit
// accumulator, and presents the sum scaled by a programmable right shift as
// the weight step. The ES gradient estimate of one weight is
//   g = 1/(N*sigma) * sum_i eps_i * F_i ,  F_i = -L_i
// and the update is w += alpha * g. The factor alpha/(N*sigma) (and the 1/M of
// the mean error) is applied as one arithmetic right shift by 'grad_shift'.
//
// Interface and timing (all synchronous to clk, reset active low):
//   draw       : eps register takes the noise generator's state, the generator
//                steps; the new eps is visible the next cycle.
//   accumulate : adds -(eps << e) to the accumulator, where 2^e is |loss|
//                rounded down to a power of two (nothing if loss == 0).
//                The sum saturates at the 32-bit limits.
//   clear      : zeroes the accumulator (after the weight has been updated);
//                clear wins over accumulate.
//   eps        : current noise sample, sent to the weight update logic.
//   step_out   : accumulator >>> grad_shift, combinational.
//
// Follows the paper: noise generator, eps register, multiplier replaced by a
// shift, sum over N, 1/(N sigma) shift, 32-bit accumulator. This design's
// choices: the saturation, the one-cycle draw/accumulate protocol and folding
// alpha and 1/M into the same shift.
module incr_training_block
  import es_pkg::*;
#(
  parameter logic [NOISE_W-1:0] SEED = 8'hA5
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      draw,
  input  logic                      accumulate,
  input  logic                      clear,
  input  logic [ACC_W-1:0]          loss,
  input  logic [SHAMT_W-1:0]        grad_shift,
  output logic signed [NOISE_W-1:0] eps,
  output logic signed [ACC_W-1:0]   grad_acc,
  output logic signed [ACC_W-1:0]   step_out
);

  localparam int unsigned PW = ACC_W + NOISE_W + 1;
  localparam logic signed [PW-1:0] ACC_MAX = PW'({1'b0, {(ACC_W-1){1'b1}}});
  localparam logic signed [PW-1:0] ACC_MIN = -ACC_MAX - PW'(1);

  logic signed [NOISE_W-1:0] gen_eps;
  logic signed [NOISE_W-1:0] eps_q;
  logic [SHAMT_W-1:0]        loss_e;
  logic                      loss_zero;
  logic signed [PW-1:0]      prod;
  logic signed [PW-1:0]      sum;
  logic signed [ACC_W-1:0]   acc_q;

  noise_lfsr #(.SEED(SEED)) u_noise (
    .clk  (clk),
    .rst_n(rst_n),
    .step (draw),
    .eps  (gen_eps)
  );

  loss_exp_quant u_quant (
    .loss (loss),
    .shamt(loss_e),
    .zero (loss_zero)
  );

  // eps * (-2^e) as a negated shift.
  always_comb begin
    prod = '0;
    if (!loss_zero) prod = -(PW'(eps_q) <<< loss_e);
    sum  = PW'(acc_q) + prod;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      eps_q <= '0;
      acc_q <= '0;
    end else begin
      if (draw) eps_q <= gen_eps;
      if (clear) acc_q <= '0;
      else if (accumulate) begin
        if (sum > ACC_MAX)      acc_q <= ACC_W'(ACC_MAX);
        else if (sum < ACC_MIN) acc_q <= ACC_W'(ACC_MIN);
        else                    acc_q <= ACC_W'(sum);
      end
    end
  end

  assign eps      = eps_q;
  assign grad_acc = acc_q;
  assign step_out = acc_q >>> grad_shift;

endmodule
