// ml_mac: the proposed multi-level binarized MAC unit (Fig. 3).
//
// Two ml_encoder instances turn the incoming input x and weight w (both Q4.12
// words) into NLX- and NLW-level codes X_ml and W_ml with their own
// power-of-two scaling factors alpha_x = 2^-ax_shift, alpha_w = 2^-aw_shift.
// ml_mul multiplies the codes as small integers and ml_acc accumulates them;
// the finished sum is scaled by gamma = alpha_x*alpha_w with one shift
// (gamma_shift = ax_shift + aw_shift) and returned as a Q4.12 word. The
// structure (two encoders, MUL, ACC, gamma shift) is the paper's; the
// one-term-per-cycle timing is this design's choice.
//
// With W_CODED = 1 the weight arrives already encoded on w_ml_in (the layer
// encodes weights once, when they are loaded, and stores only the codes);
// the weight encoder is then left out and w is not used. aw_shift still
// gives alpha_w for the gamma shift and must match the factor the codes
// were made with.
//
// Timing: one (x, w) pair per cycle while in_valid is high; first/last frame
// a dot product. The encoders and the multiplier are combinational, so the
// result appears one clock after the cycle that carries last.
module ml_mac
  import ml_pkg::*;
#(
  parameter int NLA   = NLX,  // levels of the input operand
  parameter int NLB   = NLW,  // levels of the weight operand
  parameter int ACC_W = 24,
  parameter bit W_CODED = 1'b0  // 1: weight given as a code on w_ml_in
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               first,
  input  logic               last,
  input  fix_t               x,
  input  fix_t               w,
  input  logic [NLB-1:0]     w_ml_in,
  input  logic [SHIFT_W-1:0] ax_shift,
  input  logic [SHIFT_W-1:0] aw_shift,
  output logic               out_valid,
  output fix_t               out,
  output logic               out_sat
);

  localparam int PW = NLA + NLB + 2;

  logic [NLA-1:0]       x_ml;
  logic [NLB-1:0]       w_ml;
  logic signed [PW-1:0] prod;
  logic [SHIFT_W:0]     gamma_shift;

  assign gamma_shift = (SHIFT_W+1)'(ax_shift) + (SHIFT_W+1)'(aw_shift);

  ml_encoder #(.NL(NLA)) u_enc_x (.x(x), .alpha_shift(ax_shift), .levels(x_ml));
  if (W_CODED) begin : g_w_coded
    assign w_ml = w_ml_in;
  end else begin : g_w_enc
    ml_encoder #(.NL(NLB)) u_enc_w (.x(w), .alpha_shift(aw_shift), .levels(w_ml));
  end

  ml_mul #(.NLA(NLA), .NLB(NLB), .PW(PW)) u_mul (.la(x_ml), .lb(w_ml), .prod(prod));

  ml_acc #(.PW(PW), .ACC_W(ACC_W), .NLA(NLA), .NLB(NLB)) u_acc (
    .clk, .rst_n, .in_valid, .first, .last, .prod, .gamma_shift,
    .out_valid, .out, .out_sat
  );

endmodule
