// weight_update_ctrl: the weight update control logic with the trainable
// weights it owns.
//
// The trainable weights of the layer live here, in a W = N_IN*N_OUT entry
// array (the BRAM of the paper; registers at this size). Weight j feeds
// input i of output neuron o with j = o*N_IN + i, so j = 0, 1, 2, 3 are
// w11, w21, w12, w22 of the 2x2 network. Training visits the weights in
// groups of P: group g holds weights g*P .. g*P+P-1 and weight g*P+b is
// served by incremental training block b.
//
// Per weight, three things happen:
//   * perturb: theta = sat(w + (eps_b >>> sigma_shift)), the "add noise"
//     adder, only for the weights of the current group;
//   * select:  the Training mux passes theta to the layer when 'training' is
//     high and the plain weight w otherwise;
//   * update:  on 'update' every weight of the group takes
//     sat(w + step_b), the step coming from its training block.
// The host writes the pre-trained weights through the load port before
// training ('load_en' wins over 'update').
//
// Timing: 'theta' and 'weights' are combinational from the stored weights;
// loads and updates take effect on the next clock edge.
//
// Follows the paper: weight register, noise adder, 0/1 mux driven by the
// Training signal, update path from the training block, weights to be
// trained held in memory. This design's choices: sigma as a right shift of
// the 8-bit noise sample, saturation to 12 bits, grouping of weights for
// P > 1 blocks and the load port.
module weight_update_ctrl
  import es_pkg::*;
#(
  parameter int unsigned N_IN  = 2,
  parameter int unsigned N_OUT = 2,
  parameter int unsigned P     = 1,
  localparam int unsigned W        = N_IN * N_OUT,
  localparam int unsigned N_GROUPS = (W + P - 1) / P,
  localparam int unsigned AW       = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned GW       = (N_GROUPS > 1) ? $clog2(N_GROUPS) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       load_en,
  input  logic [AW-1:0]              load_addr,
  input  logic signed [WEIGHT_W-1:0] load_data,
  input  logic                       training,
  input  logic [GW-1:0]              group,
  input  logic [SHAMT_W-1:0]         sigma_shift,
  input  logic signed [NOISE_W-1:0]  eps   [P],
  input  logic                       update,
  input  logic signed [ACC_W-1:0]    step  [P],
  output logic signed [WEIGHT_W-1:0] theta [N_OUT][N_IN],
  output logic signed [WEIGHT_W-1:0] weights [W]
);

  logic signed [WEIGHT_W-1:0] w_q [W];

  // Which block (if any) serves weight j in the current group.
  function automatic logic in_group(input int unsigned j, input logic [GW-1:0] g);
    return (j >= 32'(g) * P) && (j < (32'(g) + 1) * P);
  endfunction

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      for (int i = 0; i < N_IN; i++) begin
        int unsigned j;
        logic signed [WEIGHT_W-1:0] noise;
        j = o * N_IN + i;
        noise = WEIGHT_W'(eps[j % P]) >>> sigma_shift;
        if (training && in_group(j, group))
          theta[o][i] = sat_weight((ACC_W+1)'(w_q[j]) + (ACC_W+1)'(noise));
        else
          theta[o][i] = w_q[j];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 0; j < W; j++) w_q[j] <= '0;
    end else if (load_en) begin
      w_q[load_addr] <= load_data;
    end else if (update) begin
      for (int j = 0; j < W; j++) begin
        if (in_group(j, group))
          w_q[j] <= sat_weight((ACC_W+1)'(w_q[j]) + (ACC_W+1)'(step[j % P]));
      end
    end
  end

  assign weights = w_q;

endmodule
