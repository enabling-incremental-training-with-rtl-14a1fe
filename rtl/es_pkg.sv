// es_pkg: widths and small helpers shared by the evolution-strategy (ES)
// incremental-training datapath.
//
// The forward-pass network works on 4-bit fixed-point activations, the
// trainable weights are held at 12-bit training precision, the noise samples
// come from an 8-bit LFSR and both the loss and the gradient accumulators are
// 32 bits wide. The 4-, 8-, 12- and 32-bit widths follow the paper's network
// and its FPGA implementation; the split of the weight into integer and
// fraction bits (8 fraction bits) is this design's own choice.
package es_pkg;

  localparam int unsigned ACT_W    = 4;   // activation / input / label width (unsigned)
  localparam int unsigned WEIGHT_W = 12;  // trainable weight width (signed)
  localparam int unsigned WFRAC    = 8;   // fraction bits of a weight
  localparam int unsigned NOISE_W  = 8;   // LFSR width = epsilon width (signed)
  localparam int unsigned ACC_W    = 32;  // loss and gradient accumulator width
  localparam int unsigned SHAMT_W  = 5;   // width of every programmable shift amount

  // Operating phase of the training scheduler.
  typedef enum logic [2:0] {
    ST_IDLE    = 3'd0,  // waiting for the Training signal
    ST_DRAW    = 3'd1,  // draw a new epsilon for every active training block
    ST_EVAL    = 3'd2,  // stream the M training images, wait for their losses
    ST_GRAD    = 3'd3,  // accumulate epsilon * quantized loss
    ST_UPDATE  = 3'd4,  // apply w += shift(gradient) to the current weight group
    ST_DONE    = 3'd5   // all K iterations finished
  } es_state_e;

  // Saturate a signed value held in 'wide' bits to WEIGHT_W bits.
  function automatic logic signed [WEIGHT_W-1:0] sat_weight(input logic signed [ACC_W:0] v);
    localparam logic signed [ACC_W:0] MAXV = (ACC_W+1)'((1 << (WEIGHT_W-1)) - 1);
    localparam logic signed [ACC_W:0] MINV = -(ACC_W+1)'(1 << (WEIGHT_W-1));
    if (v > MAXV)      return WEIGHT_W'(MAXV);
    else if (v < MINV) return WEIGHT_W'(MINV);
    else               return WEIGHT_W'(v);
  endfunction

endpackage
