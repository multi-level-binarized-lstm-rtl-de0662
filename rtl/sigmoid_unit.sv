// sigmoid_unit: gate activation sigma() for the forget, input and output
// gates (Fig. 1(b), Eq. 4-6).
//
// The paper writes sigma() without saying how it is computed in hardware.
// This unit uses the hard sigmoid the paper itself defines in Eq. 11,
//     sigma(x) = clip((x + 1) / 2, 0, 1),
// which needs one adder, a one-bit shift and two comparisons. On Q4.12 words:
// y = clamp((x + 4096) >>> 1, 0, 4096), with the halving rounded toward minus
// infinity. Combinational.
module sigmoid_unit
  import ml_pkg::*;
(
  input  fix_t x,
  output fix_t y
);

  logic signed [DATA_W:0] half;

  always_comb begin
    half = ((DATA_W+1)'(x) + (DATA_W+1)'(FIX_ONE)) >>> 1;
    if (half < 0)                         y = '0;
    else if (half > (DATA_W+1)'(FIX_ONE)) y = FIX_ONE;
    else                                  y = fix_t'(half);
  end

endmodule
