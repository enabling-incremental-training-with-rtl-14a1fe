// loss_exp_quant: exponent (power-of-two) quantization of the accumulated loss.
//
// The loss of one population member is the sum of absolute errors L >= 0 over
// all training images. The ES fitness is its negative, -L. This block rounds
// |L| down to a power of two, 2^e with e the position of the leading one, so
// that the product epsilon * fitness becomes -(epsilon << e): a shift instead
// of a multiply. 'zero' is set when L == 0, in which case the product is 0.
//
// Interface: 'loss' is the unsigned accumulated loss; 'shamt' is e and
// 'zero' flags a zero loss. The sign of the quantized fitness is always
// negative and is applied by the training block. Purely combinational.
//
// The paper quantizes the loss to a power of two so the multiplier can be a
// programmable shift, and uses the negative mean absolute error as loss. The
// rounding (floor of log2) is this design's choice; the 1/M of the mean is not
// computed here but folded into the final gradient shift.
module loss_exp_quant
  import es_pkg::*;
(
  input  logic [ACC_W-1:0]   loss,
  output logic [SHAMT_W-1:0] shamt,
  output logic               zero
);

  always_comb begin
    shamt = '0;
    zero  = (loss == '0);
    for (int b = 0; b < ACC_W; b++) begin
      if (loss[b]) shamt = SHAMT_W'(b);
    end
  end

endmodule
