// tb_eeg_sequence: one whole EEG-sized input sequence through the layer at
// its default size: 1300 time steps of 32 features each, the sequence length
// and feature count of the EEG recordings the design targets, with the
// default 5-level inputs and weights and the default scaling factors.
// The features are synthetic (each channel a sum of two sinusoids with
// channel-dependent frequency plus a small random term, amplitude about 1.5);
// weights and biases are random within [-1, 1]. Every hidden output of every
// step is compared with the reference model, and the total cycle count of the
// sequence is checked against 1300 * NH*(NX+NH+4) compute cycles plus one
// cycle per input feature.
module tb_eeg_sequence;
  import ml_pkg::*;
  import tb_ml_ref_pkg::*;

  localparam int NX = 32;
  localparam int NH = 32;
  localparam int NK = NX + NH;
  localparam int JW = $clog2(NH);
  localparam int KW = $clog2(NK);
  localparam int STEPS = 1300;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0;
  scale_cfg_t cfg_scale = SCALE_5_5, scale;
  logic pw_en = 0, pw_bias = 0;
  gate_e pw_gate = GATE_C;
  logic [JW-1:0] pw_row = '0;
  logic [KW-1:0] pw_col = '0;
  fix_t pw_data = '0;
  logic seq_clear = 0, x_valid = 0, x_ready;
  fix_t x_data = '0;
  logic h_valid, step_done, busy, mac_clip;
  logic [JW-1:0] h_index;
  fix_t h_data;

  mlb_lstm dut (
    .clk, .rst_n, .cfg_we, .cfg_scale, .scale, .pw_en, .pw_bias, .pw_gate, .pw_row,
    .pw_col, .pw_data, .seq_clear, .x_valid, .x_ready, .x_data, .h_valid, .h_index,
    .h_data, .step_done, .busy, .mac_clip);

  int w [];
  int b [];
  int xv [];
  int h_ref [];
  int c_ref [];
  int ref_clips = 0;
  int n_h = 0, n_steps = 0;
  longint cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && h_valid) begin
      checks++;
      n_h++;
      if (s16(h_data) != h_ref[h_index]) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d h[%0d] got %0d exp %0d", n_steps, h_index, s16(h_data), h_ref[h_index]);
      end
    end
  end

  initial begin
    #(64'd2_000_000_000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    w     = new[4*NH*NK];
    b     = new[4*NH];
    xv    = new[NX];
    h_ref = new[NH];
    c_ref = new[NH];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 4; g++)
      for (int j = 0; j < NH; j++) begin
        for (int k = 0; k < NK; k++) begin
          w[(g*NH + j)*NK + k] = int'($urandom_range(0, 8192)) - 4096;
          @(negedge clk);
          pw_en = 1; pw_bias = 0; pw_gate = gate_e'(g); pw_row = JW'(j); pw_col = KW'(k);
          pw_data = fix_t'(w[(g*NH + j)*NK + k]);
        end
        b[g*NH + j] = int'($urandom_range(0, 8192)) - 4096;
        @(negedge clk);
        pw_bias = 1; pw_data = fix_t'(b[g*NH + j]);
      end
    @(negedge clk);
    pw_en = 0; pw_bias = 0;
    seq_clear = 1;
    @(negedge clk);
    seq_clear = 0;
    t0 = cyc;
    for (int t = 0; t < STEPS; t++) begin
      for (int k = 0; k < NX; k++) begin
        real v;
        v = 0.9 * $sin(6.2831853 * real'(t) * (0.004 + 0.001 * k))
          + 0.5 * $sin(6.2831853 * real'(t) * (0.031 + 0.002 * k) + real'(k))
          + 0.1 * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
        xv[k] = int'($floor(v * ONE));
      end
      for (int k = 0; k < NX; k++) begin
        x_valid = 1; x_data = fix_t'(xv[k]);
        @(negedge clk);
      end
      x_valid = 0;
      lstm_step(NX, NH, NLX, NLW, int'(scale.x), int'(scale.wf), int'(scale.wr), int'(scale.b),
                w, b, xv, h_ref, c_ref, ref_clips);
      while (!step_done) @(negedge clk);
      n_steps++;
    end
    // all steps and all hidden outputs, and the cycle budget
    checks++;
    if (n_h != STEPS * NH) failures++;
    checks++;
    if (cyc - t0 != longint'(STEPS) * (NH * (NK + 4) + NX)) begin
      failures++;
      $display("FAIL sequence took %0d cycles, expected %0d", cyc - t0, STEPS * (NH * (NK + 4) + NX));
    end
    $display("EEG sequence: %0d steps, %0d cycles, h[0..3] = %0d %0d %0d %0d", n_steps, cyc - t0,
             h_ref[0], h_ref[1], h_ref[2], h_ref[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
