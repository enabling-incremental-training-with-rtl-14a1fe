// noise_lfsr: the noise generator of one incremental training block.
//
// An 8-bit Fibonacci linear feedback shift register with the maximal-length
// polynomial x^8 + x^6 + x^5 + x^4 + 1 (taps at bits 7, 5, 4 and 3). Each
// cycle with 'step' high the register shifts left by one and the XOR of the
// taps enters at bit 0; the 255 non-zero states repeat with period 255. The
// state, read as a two's-complement number, is the noise sample epsilon.
//
// Interface: 'step' advances the register; 'eps' is the current state; reset
// (synchronous, active low) loads SEED, which must be non-zero.
// Timing: 'eps' changes on the clock edge after 'step'.
//
// The paper specifies an 8-bit LFSR as the noise generator. The polynomial,
// the seed and the reading of the state as a signed sample are this design's
// choices. The samples are uniformly distributed over [-128, 127] without 0,
// not Gaussian.
module noise_lfsr
  import es_pkg::*;
#(
  parameter logic [NOISE_W-1:0] SEED = 8'hA5
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      step,
  output logic signed [NOISE_W-1:0] eps
);

  logic [NOISE_W-1:0] state;
  logic               fb;

  assign fb  = state[7] ^ state[5] ^ state[4] ^ state[3];
  assign eps = signed'(state);

  always_ff @(posedge clk) begin
    if (!rst_n)    state <= SEED;
    else if (step) state <= {state[NOISE_W-2:0], fb};
  end

  initial assert (SEED != '0) else $error("noise_lfsr: SEED must be non-zero");

endmodule
