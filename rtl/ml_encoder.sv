// ml_encoder: N-level residual binarization of one fixed-point value.
//
// This is the "Encoder" box of the MAC unit (Fig. 3) and follows the paper's
// Algorithm 1 step by step: the residual r starts at x; level i takes the
// sign of r (1 for r >= 0, encoding +1; 0 otherwise, encoding -1), then the
// signed level times alpha/2^(i-1) is subtracted from r. Each level halves the
// scaling factor of the one before, so x is approximated by
//     x ~= alpha * sum_i s_i * 2^-(i-1),   s_i = 2*l_i - 1.
// Read as an unsigned number L with the first level as its MSB, the code has
// the integer value ML = 2*L - (2^NL - 1) (odd, in [-(2^NL-1), 2^NL-1]), and
// x ~= ML * alpha / 2^(NL-1).
//
// alpha = 2^-alpha_shift is a power of two (paper Sec. IV-C). The NL levels are
// unrolled into a purely combinational chain of NL add/subtract stages; the
// paper does not say whether the encoder is iterative or unrolled, this
// design unrolls it so that one value is encoded per cycle. The step sizes
// are exact as long as alpha_shift + NL - 1 <= FRAC; beyond that the smallest
// steps fall below the word's LSB and become zero.
//
// Ports: x (Q4.12 word), alpha_shift, levels[NL-1] = first level l_1 ...
// levels[0] = last level l_NL. No clock: output valid in the same cycle.
module ml_encoder
  import ml_pkg::*;
#(
  parameter int NL = NLX   // number of binarization levels
) (
  input  fix_t               x,
  input  logic [SHIFT_W-1:0] alpha_shift,
  output logic [NL-1:0]      levels
);

  // Two guard bits: |r| stays below |x| + 2*alpha <= 8 + 2.
  localparam int RW = DATA_W + 2;

  logic signed [RW-1:0] r [NL+1];
  logic signed [RW-1:0] step [NL];

  always_comb begin
    r[0] = RW'(x);
    for (int i = 0; i < NL; i++) begin
      step[i]       = (RW'(signed'(1)) <<< FRAC) >>> (alpha_shift + SHIFT_W'(i));
      levels[NL-1-i] = ~r[i][RW-1];  // Sign(r): 1 when r >= 0
      r[i+1]        = levels[NL-1-i] ? (r[i] - step[i]) : (r[i] + step[i]);
    end
  end

endmodule
