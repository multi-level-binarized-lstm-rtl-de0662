// mlb_lstm: one LSTM layer whose gate matrix-vector products run on
// multi-level binarized MAC units.
//
// Each time step the layer takes an input vector x_t of NX features and
// produces the hidden vector h_t of NH units (Fig. 1(b), Eq. 1 and 4-8):
//     gate_g[j] = sigma/tanh( sum_k Wf_g[j,k] x_t[k]
//                           + sum_k Wr_g[j,k] h_(t-1)[k] + b_g[j] )
//     c_t[j] = f[j]*c_(t-1)[j] + i[j]*m[j],   h_t[j] = o[j]*tanh(c_t[j])
// Four ml_mac units, one per gate (c/m, f, i, o), work in parallel as the four
// gate boxes of Fig. 1(b) do. Every operand of the products is multi-level
// binarized with its own power-of-two scaling factor: inputs x and the
// fed-back h with alpha_X, forward weights with alpha_Wf, recurrent weights
// with alpha_Wr and biases with alpha_B (Table II; defaults are the paper's
// (5,5) row). x and h are encoded on the fly inside the MACs. Weights and
// biases are encoded once, as they are written, by an encoder in the load
// path, and only their NLB-bit codes are stored (5 bits instead of a 16-bit
// word). The forward and recurrent halves of a row are two
// separate dot products, because each half has its own gamma shift; their
// results and the decoded bias are added into the gate pre-activation.
//
// Sequencing (this design's own; the paper gives no controller):
//   IDLE   accepts x_t one feature per beat on x_valid/x_ready. After NX
//          beats the step starts and x_ready stays low until it ends.
//   ISSUE  for hidden unit j, reads column k = 0 .. NX+NH-1 of row j of all
//          four weight banks, one column per cycle; the MACs take the
//          column one cycle later (synchronous memory read).
//   WAIT   waits for the recurrent dot product, the activations and the
//          state update of unit j; then h_t[j] leaves on h_valid/h_index/
//          h_data, c_t[j] is stored and the next unit starts.
// One hidden unit takes NX+NH+4 cycles, one time step NH*(NX+NH+4) cycles
// after its last input beat (2176 cycles at the defaults). h_(t-1) is double
// buffered: the new h_t replaces it only after the last unit, when step_done
// pulses. seq_clear (in IDLE) zeroes h and c to start a new sequence.
//
// Parameters and scaling factors are written while the layer is idle:
// pw_* writes a weight or bias word, cfg_we loads new scaling factors. A
// weight or bias is encoded with the alpha_Wf, alpha_Wr or alpha_B in force
// when it is written, so after changing those factors the parameters must be
// written again; alpha_X may change at any idle time.
module mlb_lstm
  import ml_pkg::*;
#(
  parameter int NX  = 32,   // features per time step (paper: 32 EEG features)
  parameter int NH  = 32,   // hidden units (not given by the paper)
  parameter int NLA = NLX,  // levels of inputs x and h (paper main: 5)
  parameter int NLB = NLW   // levels of weights and biases (paper main: 5)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // scaling-factor configuration
  input  logic                      cfg_we,
  input  scale_cfg_t                cfg_scale,
  output scale_cfg_t                scale,
  // parameter load
  input  logic                      pw_en,
  input  logic                      pw_bias,
  input  gate_e                     pw_gate,
  input  logic [$clog2(NH)-1:0]     pw_row,
  input  logic [$clog2(NX+NH)-1:0]  pw_col,
  input  fix_t                      pw_data,
  // sequence control
  input  logic                      seq_clear,
  // input feature stream
  input  logic                      x_valid,
  output logic                      x_ready,
  input  fix_t                      x_data,
  // hidden state stream (to the classifier)
  output logic                      h_valid,
  output logic [$clog2(NH)-1:0]     h_index,
  output fix_t                      h_data,
  output logic                      step_done,
  output logic                      busy,
  output logic                      mac_clip    // a gate dot product saturated
);

  localparam int NK = NX + NH;
  localparam int JW = $clog2(NH);
  localparam int KW = $clog2(NK);
  localparam int XW = $clog2(NX);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_e;

  state_e          state;
  logic [JW-1:0]   j;
  logic [KW-1:0]   k;
  logic [XW-1:0]   xcnt;

  fix_t xbuf    [NX];
  fix_t h_prev  [NH];
  fix_t h_next  [NH];
  fix_t c_state [NH];

  // ---------------- parameter encoder and memory ----------------
  // Weights and biases are binarized on their way into the memory, each with
  // the scaling factor of its class: bias, forward column or recurrent column.
  logic [SHIFT_W-1:0] pw_shift;
  logic [NLB-1:0]     pw_ml;
  logic [NLB-1:0]     rd_w [NGATES];
  logic [NLB-1:0]     rd_b [NGATES];
  logic               rd_en;

  assign pw_shift = pw_bias ? scale.b : (pw_col >= KW'(NX)) ? scale.wr : scale.wf;
  assign rd_en    = (state == S_ISSUE);

  ml_encoder #(.NL(NLB)) u_enc_param (.x(pw_data), .alpha_shift(pw_shift), .levels(pw_ml));

  param_mem #(.NX(NX), .NH(NH), .WW(NLB)) u_mem (
    .clk,
    .wr_en(pw_en), .wr_bias(pw_bias), .wr_gate(pw_gate),
    .wr_row(pw_row), .wr_col(pw_col), .wr_data(pw_ml),
    .rd_en, .rd_row(j), .rd_col(k), .rd_w, .rd_b
  );

  // ---------------- issue pipeline ----------------
  logic          p1_valid, p1_first, p1_last, p1_rec;
  logic [KW-1:0] p1_k;
  logic          p2_rec;   // the MAC result of this cycle is the recurrent half

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1_valid <= 1'b0;
      p1_first <= 1'b0;
      p1_last  <= 1'b0;
      p1_rec   <= 1'b0;
      p1_k     <= '0;
      p2_rec   <= 1'b0;
    end else begin
      p1_valid <= rd_en;
      p1_k     <= k;
      p1_rec   <= (k >= KW'(NX));
      p1_first <= (k == '0) || (k == KW'(NX));
      p1_last  <= (k == KW'(NX - 1)) || (k == KW'(NK - 1));
      p2_rec   <= p1_valid && p1_last && p1_rec;
    end
  end

  // ---------------- four gate MACs ----------------
  fix_t               mac_x;
  logic [SHIFT_W-1:0] mac_aw;
  logic               mac_valid [NGATES];
  fix_t               mac_out   [NGATES];
  logic               mac_sat   [NGATES];

  always_comb begin
    mac_x  = p1_rec ? h_prev[JW'(p1_k - KW'(NX))] : xbuf[XW'(p1_k)];
    mac_aw = p1_rec ? scale.wr : scale.wf;
  end

  for (genvar g = 0; g < NGATES; g++) begin : g_mac
    ml_mac #(.NLA(NLA), .NLB(NLB), .W_CODED(1'b1)) u_mac (
      .clk, .rst_n,
      .in_valid(p1_valid), .first(p1_first), .last(p1_last),
      .x(mac_x), .w('0), .w_ml_in(rd_w[g]),
      .ax_shift(scale.x), .aw_shift(mac_aw),
      .out_valid(mac_valid[g]), .out(mac_out[g]), .out_sat(mac_sat[g])
    );
  end

  // ---------------- bias decoding ----------------
  // The stored bias code is turned back into a word for the addition:
  // b ~= ML(b) * alpha_B / 2^(NLB-1).
  fix_t b_fix [NGATES];

  for (genvar g = 0; g < NGATES; g++) begin : g_bias
    logic signed [NLB+1:0]          b_int;
    logic signed [NLB+2+FRAC-1:0]   b_wide;
    always_comb begin
      b_int    = ($signed({2'b00, rd_b[g]}) <<< 1) - $signed((NLB+2)'((1 << NLB) - 1));
      b_wide   = ((NLB+2+FRAC)'(b_int) <<< FRAC) >>> (scale.b + SHIFT_W'(NLB - 1));
      b_fix[g] = sat_fix(48'(b_wide));
    end
  end

  // ---------------- gate pre-activations ----------------
  fix_t fwd_sum [NGATES];
  fix_t preact  [NGATES];
  logic act_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_valid <= 1'b0;
      for (int g = 0; g < NGATES; g++) begin
        fwd_sum[g] <= '0;
        preact[g]  <= '0;
      end
    end else begin
      act_valid <= mac_valid[0] && p2_rec;
      if (mac_valid[0]) begin
        for (int g = 0; g < NGATES; g++) begin
          if (!p2_rec) fwd_sum[g] <= mac_out[g];
          else preact[g] <= sat_fix(48'(fwd_sum[g]) + 48'(mac_out[g]) + 48'(b_fix[g]));
        end
      end
    end
  end

  // ---------------- activations and state update ----------------
  fix_t m_act, f_act, i_act, o_act;

  tanh_unit    u_act_m (.x(preact[GATE_C]), .y(m_act));
  sigmoid_unit u_act_f (.x(preact[GATE_F]), .y(f_act));
  sigmoid_unit u_act_i (.x(preact[GATE_I]), .y(i_act));
  sigmoid_unit u_act_o (.x(preact[GATE_O]), .y(o_act));

  logic upd_valid;
  fix_t c_new, h_new;

  lstm_update u_upd (
    .clk, .rst_n,
    .in_valid(act_valid),
    .f(f_act), .i(i_act), .o(o_act), .m(m_act), .c_prev(c_state[j]),
    .out_valid(upd_valid), .c_new, .h_new
  );

  // ---------------- controller ----------------
  assign x_ready   = (state == S_IDLE) && !seq_clear;
  assign busy      = (state != S_IDLE);
  assign h_valid   = upd_valid;
  assign h_index   = j;
  assign h_data    = h_new;
  assign mac_clip  = mac_valid[0] &&
                     (mac_sat[0] || mac_sat[1] || mac_sat[2] || mac_sat[3]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      j         <= '0;
      k         <= '0;
      xcnt      <= '0;
      step_done <= 1'b0;
      scale     <= SCALE_5_5;
      for (int n = 0; n < NX; n++) xbuf[n] <= '0;
      for (int n = 0; n < NH; n++) begin
        h_prev[n]  <= '0;
        h_next[n]  <= '0;
        c_state[n] <= '0;
      end
    end else begin
      step_done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (cfg_we) scale <= cfg_scale;
          if (seq_clear) begin
            xcnt <= '0;
            for (int n = 0; n < NH; n++) begin
              h_prev[n]  <= '0;
              c_state[n] <= '0;
            end
          end else if (x_valid) begin
            xbuf[xcnt] <= x_data;
            if (xcnt == XW'(NX - 1)) begin
              xcnt  <= '0;
              j     <= '0;
              k     <= '0;
              state <= S_ISSUE;
            end else begin
              xcnt <= xcnt + 1'b1;
            end
          end
        end
        S_ISSUE: begin
          if (k == KW'(NK - 1)) state <= S_WAIT;
          else                  k     <= k + 1'b1;
        end
        S_WAIT: begin
          if (upd_valid) begin
            c_state[j] <= c_new;
            h_next[j]  <= h_new;
            if (j == JW'(NH - 1)) begin
              for (int n = 0; n < NH - 1; n++) h_prev[n] <= h_next[n];
              h_prev[NH-1] <= h_new;
              step_done    <= 1'b1;
              state        <= S_IDLE;
            end else begin
              j     <= j + 1'b1;
              k     <= '0;
              state <= S_ISSUE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- protocol rules ----------------
  // Parameters and scaling factors may only change between time steps.
  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    !(pw_en && busy));
  // MAC results only arrive while a row is being processed.
  a_mac_in_row: assert property (@(posedge clk) disable iff (!rst_n)
    mac_valid[0] |-> (state != S_IDLE));
  // The four gate MACs run in lock step.
  a_lock_step: assert property (@(posedge clk) disable iff (!rst_n)
    (mac_valid[0] == mac_valid[1]) && (mac_valid[0] == mac_valid[2]) &&
    (mac_valid[0] == mac_valid[3]));

endmodule
