// lstm_update: element-wise state update of one hidden unit (Eq. 7-8,
// Fig. 1(b)).
//
//     c_t = f_t * c_(t-1) + i_t * m_t
//     h_t = o_t * tanh(c_t)
//
// f, i, o are gate values in [0, 1], m is the cell candidate in [-1, 1] and
// c_prev the stored cell state, all Q4.12 words. The two products of c_t are
// added at full width and shifted back to Q4.12 once (rounding toward minus
// infinity), then saturated; tanh is the hard tanh of tanh_unit. The paper
// gives the equations; word widths, rounding and saturation are this
// design's choices. These multipliers are full 16-bit ones: the paper
// binarizes only the gate matrix-vector products, not the element-wise step.
//
// Timing: in_valid with the inputs; c_new, h_new and out_valid are registered
// and appear one clock later.
module lstm_update
  import ml_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fix_t f,
  input  fix_t i,
  input  fix_t o,
  input  fix_t m,
  input  fix_t c_prev,
  output logic out_valid,
  output fix_t c_new,
  output fix_t h_new
);

  logic signed [2*DATA_W:0]   c_wide;
  fix_t                       c_sat, c_act;
  logic signed [2*DATA_W-1:0] h_wide;

  always_comb begin
    c_wide = (2*DATA_W+1)'(f * c_prev) + (2*DATA_W+1)'(i * m);
    c_sat  = sat_fix(48'(c_wide >>> FRAC));
  end

  tanh_unit u_tanh (.x(c_sat), .y(c_act));

  always_comb h_wide = o * c_act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      c_new     <= '0;
      h_new     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        c_new <= c_sat;
        h_new <= sat_fix(48'(h_wide >>> FRAC));
      end
    end
  end

endmodule
