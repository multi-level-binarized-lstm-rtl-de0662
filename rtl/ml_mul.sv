// ml_mul: the fixed-point MUL unit of the MAC (Fig. 3).
//
// Takes the multi-level codes of one input (NLA levels) and one weight (NLB
// levels), turns each into its odd integer value ML = 2*L - (2^NL - 1) (see
// ml_encoder) and multiplies the two small signed integers. With 5 levels on
// both sides this is a 6-bit by 6-bit signed product, which is what replaces
// the full-precision multiplier; the common scale alpha_x*alpha_w is applied
// later by a shift (ml_acc). The paper names a "fixed-point MUL unit"; that it
// is a plain combinational signed multiplier is this design's choice.
//
// Ports: la, lb codes; prod = ML(la) * ML(lb). Combinational.
module ml_mul #(
  parameter int NLA = 5,
  parameter int NLB = 5,
  parameter int PW  = NLA + NLB + 2   // product width
) (
  input  logic [NLA-1:0]        la,
  input  logic [NLB-1:0]        lb,
  output logic signed [PW-1:0]  prod
);

  logic signed [NLA+1:0] va;
  logic signed [NLB+1:0] vb;

  always_comb begin
    va   = ($signed({2'b00, la}) <<< 1) - $signed((NLA+2)'((1 << NLA) - 1));
    vb   = ($signed({2'b00, lb}) <<< 1) - $signed((NLB+2)'((1 << NLB) - 1));
    prod = va * vb;
  end

endmodule
