// ml_acc: fixed-point accumulator with the gamma shift (Fig. 3, Eq. 13).
//
// Accumulates the integer products of ml_mul over one dot product. The
// product of two codes stands for ML(x)*ML(w) * alpha_x*alpha_w /
// 2^((NLX-1)+(NLW-1)); since both alphas are powers of two their product
// gamma is one too, and the whole scale is a single arithmetic shift applied
// once to the finished sum, as the paper's "simple shift" does. The shifted
// sum is converted to a Q4.12 word (rounded toward minus infinity) and
// saturated. Rounding and saturation are this design's choices.
//
// Timing: one product per cycle when in_valid is high. first restarts the
// sum with this product; last marks the final product, and out/out_valid
// appear on the next clock edge. A new dot product may start on the cycle
// after last, so back-to-back dot products run without a gap.
// gamma_shift is sampled together with the last product.
module ml_acc
  import ml_pkg::*;
#(
  parameter int PW    = 12,   // product width
  parameter int ACC_W = 24,   // accumulator width
  parameter int NLA   = NLX,  // levels of the input operand
  parameter int NLB   = NLW   // levels of the weight operand
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  first,
  input  logic                  last,
  input  logic signed [PW-1:0]  prod,
  input  logic [SHIFT_W:0]      gamma_shift,  // gamma = 2^-gamma_shift
  output logic                  out_valid,
  output fix_t                  out,
  output logic                  out_sat       // out was clipped
);

  localparam int EW = ACC_W + FRAC;

  logic signed [ACC_W-1:0] acc, sum;
  logic signed [EW-1:0]    scaled;
  logic [SHIFT_W+1:0]      total_shift;

  always_comb begin
    sum         = (first ? '0 : acc) + ACC_W'(prod);
    total_shift = (SHIFT_W+2)'(gamma_shift) + (SHIFT_W+2)'(NLA - 1 + NLB - 1);
    scaled      = (EW'(sum) <<< FRAC) >>> total_shift;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out       <= '0;
      out_sat   <= 1'b0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        acc <= sum;
        if (last) begin
          out     <= sat_fix(48'(scaled));
          out_sat <= (48'(scaled) != 48'(sat_fix(48'(scaled))));
        end
      end
    end
  end

  // A result follows every last product one clock later, and only then.
  a_result_timing: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && last) |=> out_valid);
  a_no_spurious_result: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> $past(in_valid && last));

endmodule
