// ml_pkg: shared types and constants of the multi-level binarized LSTM.
//
// All real-valued quantities (EEG features, weights, biases, gate values, the
// cell state c and the hidden state h) travel as signed two's-complement
// fixed-point words of DATA_W bits with FRAC fractional bits (Q4.12 by
// default: range [-8, 8), resolution 1/4096). The word format is this design's
// own choice; the paper does not give one.
//
// A scaling factor alpha is always a power of two not above one
// (1, 1/2, 1/4, ...), as the paper prescribes, and is carried as its shift
// amount: alpha = 2^-shift. The default shifts are the paper's Table II row
// for 5-level inputs and 5-level weights: X = 1/2, forward weights W_f = 1/4,
// recurrent weights W_r = 1/8, bias B = 1/2.
package ml_pkg;

  localparam int DATA_W  = 16;  // fixed-point word width
  localparam int FRAC    = 12;  // fractional bits of a word
  localparam int NLX     = 5;   // binarization levels of inputs (x and h)
  localparam int NLW     = 5;   // binarization levels of weights and biases
  localparam int SHIFT_W = 4;   // width of a scaling-factor shift amount

  typedef logic signed [DATA_W-1:0] fix_t;

  localparam fix_t FIX_ONE = fix_t'(1 <<< FRAC);

  // The four gate rows of Fig. 1(b), in the order of the weight banks.
  typedef enum logic [1:0] {
    GATE_C = 2'd0,  // cell candidate m_t (tanh)
    GATE_F = 2'd1,  // forget gate f_t (sigmoid)
    GATE_I = 2'd2,  // input gate i_t (sigmoid)
    GATE_O = 2'd3   // output gate o_t (sigmoid)
  } gate_e;

  localparam int NGATES = 4;

  // Power-of-two scaling factors, one per parameter class (Table II columns).
  typedef struct packed {
    logic [SHIFT_W-1:0] x;   // alpha_X  = 2^-x  (inputs and fed-back h)
    logic [SHIFT_W-1:0] wf;  // alpha_Wf = 2^-wf (forward weights, times x)
    logic [SHIFT_W-1:0] wr;  // alpha_Wr = 2^-wr (recurrent weights, times h)
    logic [SHIFT_W-1:0] b;   // alpha_B  = 2^-b  (biases)
  } scale_cfg_t;

  // Table II, row (5,5): X = 1/2, W_f = 1/4, W_r = 1/8, B = 1/2.
  localparam scale_cfg_t SCALE_5_5 = '{x: 4'd1, wf: 4'd2, wr: 4'd3, b: 4'd1};

  // Saturate a wide signed value to one fixed-point word.
  function automatic fix_t sat_fix(input logic signed [47:0] v);
    if (v > 48'sd32767)       return fix_t'(16'sh7fff);
    else if (v < -48'sd32768) return fix_t'(16'sh8000);
    else                      return fix_t'(v[DATA_W-1:0]);
  endfunction

endpackage
