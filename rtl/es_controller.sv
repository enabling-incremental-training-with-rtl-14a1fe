// es_controller: the training scheduler of the weight update control logic.
//
// It runs the loops of the ES incremental-training algorithm,
//   for t < K_ITER:                      (iterations)
//     for g < N_GROUPS:                  (W/P groups of weights, one per block)
//       for i < N_POP:                   (population members)
//         draw eps for every block; stream M_IMAGES training images
//         through the layer with the perturbed weights; accumulate the loss;
//         add eps * quantized fitness to each block's gradient sum
//       update the weights of group g, clear the gradient sums
// so it performs exactly K_ITER * N_GROUPS * N_POP * M_IMAGES training
// forward passes, the t_f * (W/P) * M * N * k of the paper's training-time
// estimate.
//
// Sharing the layer with inference: the layer is an inference engine first.
// A training image is only issued ('train_ready') in a cycle with no
// inference request, so inference passes slip in between training passes
// and are never delayed. When the Training signal 'train_en' goes low the
// controller freezes in its current state with every counter intact and
// continues from there when it returns high; nothing of the training effort
// is lost. After the last iteration it sits in ST_DONE with 'done' high
// until 'train_en' is lowered, which returns it to ST_IDLE for a new run.
//
// Per population member the sequence is ST_DRAW (1 cycle), ST_EVAL (the M
// issue cycles plus the cycles until the last loss has been added, 2 more
// when nothing stalls), ST_GRAD (1 cycle); ST_UPDATE takes 1 cycle per group.
//
// Follows the paper: the loop order and counts of Algorithm 1 with the
// per-weight reuse of the training block, training interleaved with
// inference, pause without loss of progress. The state encoding, the
// one-cycle phases and the priority of inference are this design's choices.
module es_controller
  import es_pkg::*;
#(
  parameter int unsigned N_POP    = 100,
  parameter int unsigned K_ITER   = 100,
  parameter int unsigned M_IMAGES = 10000,
  parameter int unsigned N_GROUPS = 4,
  localparam int unsigned GW      = (N_GROUPS > 1) ? $clog2(N_GROUPS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          train_en,     // the Training signal
  input  logic          infer_valid,  // an inference pass wants the layer
  input  logic          train_valid,  // the training image at 'img_idx' is present
  input  logic          loss_done,    // loss accumulator has all M images
  output logic          train_ready,  // issue the training image this cycle
  output logic [31:0]   img_idx,      // index m of the training image requested
  output logic          draw,         // blocks: take a new eps
  output logic          loss_clear,   // loss accumulator: start a new member
  output logic          grad_acc,     // blocks: accumulate eps * fitness
  output logic          update,       // apply the step to the group's weights
  output logic [GW-1:0] group,        // weight group under training
  output logic [31:0]   pop,          // population member i
  output logic [31:0]   iter,         // iteration t
  output logic          training,     // the layer pass issued now is a training pass
  output logic          busy,
  output logic          done,
  output es_state_e     state
);

  es_state_e state_q, state_d;
  logic [31:0]   issued_q;
  logic [GW-1:0] group_q;
  logic [31:0]   pop_q, iter_q;
  logic          run;

  assign run = train_en;

  always_comb begin
    state_d     = state_q;
    train_ready = 1'b0;
    draw        = 1'b0;
    loss_clear  = 1'b0;
    grad_acc    = 1'b0;
    update      = 1'b0;
    unique case (state_q)
      ST_IDLE:   if (run) state_d = ST_DRAW;
      ST_DRAW: if (run) begin
        draw       = 1'b1;
        loss_clear = 1'b1;
        state_d    = ST_EVAL;
      end
      ST_EVAL: if (run) begin
        train_ready = !infer_valid && (issued_q < 32'(M_IMAGES));
        if (loss_done) state_d = ST_GRAD;
      end
      ST_GRAD: if (run) begin
        grad_acc = 1'b1;
        state_d  = (pop_q == 32'(N_POP - 1)) ? ST_UPDATE : ST_DRAW;
      end
      ST_UPDATE: if (run) begin
        update  = 1'b1;
        state_d = ((32'(group_q) == 32'(N_GROUPS - 1)) && (iter_q == 32'(K_ITER - 1)))
                  ? ST_DONE : ST_DRAW;
      end
      ST_DONE:   if (!run) state_d = ST_IDLE;
      default:   state_d = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q  <= ST_IDLE;
      issued_q <= '0;
      group_q  <= '0;
      pop_q    <= '0;
      iter_q   <= '0;
    end else begin
      state_q <= state_d;
      if (state_q == ST_IDLE && run) begin
        group_q <= '0;
        pop_q   <= '0;
        iter_q  <= '0;
      end
      if (draw) issued_q <= '0;
      else if (train_ready && train_valid) issued_q <= issued_q + 32'd1;
      if (grad_acc) pop_q <= (pop_q == 32'(N_POP - 1)) ? '0 : pop_q + 32'd1;
      if (update) begin
        if (32'(group_q) == 32'(N_GROUPS - 1)) begin
          group_q <= '0;
          iter_q  <= iter_q + 32'd1;
        end else begin
          group_q <= group_q + GW'(1);
        end
      end
    end
  end

  assign img_idx  = issued_q;
  assign training = train_ready && train_valid;
  assign group    = group_q;
  assign pop      = pop_q;
  assign iter     = iter_q;
  assign busy     = (state_q != ST_IDLE) && (state_q != ST_DONE);
  assign done     = (state_q == ST_DONE);
  assign state    = state_q;

  // Handshake rules: a training pass is never issued together with an
  // inference pass, and never more than M_IMAGES per population member.
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
    !(train_ready && infer_valid));
  a_issue_bound: assert property (@(posedge clk) disable iff (!rst_n)
    issued_q <= 32'(M_IMAGES));

endmodule
