// tanh_unit: tanh() activation of the cell candidate m_t (Eq. 1) and of the
// cell state before the output gate (Eq. 8), Fig. 1(b).
//
// The paper does not say how tanh is computed in hardware. This unit uses the
// hard tanh, the usual companion of the paper's hard sigmoid (Eq. 11):
//     tanh(x) ~= clip(x, -1, 1),
// which on Q4.12 words is a clamp to [-4096, 4096]. Combinational.
module tanh_unit
  import ml_pkg::*;
(
  input  fix_t x,
  output fix_t y
);

  always_comb begin
    if (x > FIX_ONE)       y = FIX_ONE;
    else if (x < -FIX_ONE) y = -FIX_ONE;
    else                   y = x;
  end

endmodule
