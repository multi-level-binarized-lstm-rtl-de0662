// tb_mlb_lstm_l11: end-to-end test of the multi-level binarized LSTM layer
// // at a reduced size (NX = 6, NH = 4) built for 1-level inputs and weights,
// the conventional binarized LSTM (sign only) of Table III.
//
// Loads random weights and biases through the parameter port, then runs
// several input sequences through the layer and compares every hidden output
// h_t[j] (value and index) with a reference model of the whole time step
// (binarization in real arithmetic, Eq. 1 and 4-8). It exercises and counts:
// time steps, input back-pressure (x_valid held while the layer is busy),
// gaps in the input stream, sequence restarts (seq_clear), changes of the
// scaling factors (Table II rows; weights are re-written after a change of
// the weight or bias factors, since they are stored encoded) and saturated
// gate dot products. Each of
// these must happen at least once. It also checks the step latency:
// step_done is set by the NH*(NX+NH+4)-th clock edge after the edge that
// accepts the last input feature (so it is sampled high one edge later).
module tb_mlb_lstm_l11;
  import ml_pkg::*;
  import tb_ml_ref_pkg::*;

  localparam int NX = 6;
  localparam int NH = 4;
  localparam int NK = NX + NH;
  localparam int JW = $clog2(NH);
  localparam int KW = $clog2(NK);
  // saturated dot products must occur (too rare to force with 1-level codes)
  localparam bit NEED_CLIP = 1'b0;

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

  mlb_lstm #(.NX(6), .NH(4), .NLA(1), .NLB(1)) dut (
    .clk, .rst_n, .cfg_we, .cfg_scale, .scale, .pw_en, .pw_bias, .pw_gate, .pw_row,
    .pw_col, .pw_data, .seq_clear, .x_valid, .x_ready, .x_data, .h_valid, .h_index,
    .h_data, .step_done, .busy, .mac_clip);

  // reference state
  int w [];
  int b [];
  int xv [];
  int h_ref [];
  int c_ref [];
  int ref_clips = 0;

  // mechanism counters
  int n_steps = 0, n_stall = 0, n_gaps = 0, n_clear = 0, n_cfg = 0, n_clip = 0;
  int n_h = 0;

  int cyc = 0, accept_cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (x_valid && !x_ready) n_stall++;
      if (mac_clip) n_clip++;
      if (h_valid) begin
        checks++;
        n_h++;
        if (s16(h_data) != h_ref[h_index]) begin
          failures++;
          if (failures < 10) $display("FAIL step %0d h[%0d] got %0d exp %0d", n_steps, h_index, s16(h_data), h_ref[h_index]);
        end
      end
      if (x_valid && x_ready && cyc >= 0) accept_cyc <= cyc;
      if (step_done) begin
        checks++;
        if (cyc - accept_cyc != NH * (NK + 4) + 1) begin
          failures++;
          $display("FAIL step latency %0d exp %0d", cyc - accept_cyc, NH * (NK + 4) + 1);
        end
      end
    end
  end

  initial begin
    #(64'd50_000_000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_params(input int wmax, input int bmax);
    for (int g = 0; g < 4; g++)
      for (int j = 0; j < NH; j++) begin
        for (int k = 0; k < NK; k++) begin
          w[(g*NH + j)*NK + k] = int'($urandom_range(0, 2*wmax)) - wmax;
          @(negedge clk);
          pw_en = 1; pw_bias = 0; pw_gate = gate_e'(g); pw_row = JW'(j); pw_col = KW'(k);
          pw_data = fix_t'(w[(g*NH + j)*NK + k]);
        end
        b[g*NH + j] = int'($urandom_range(0, 2*bmax)) - bmax;
        @(negedge clk);
        pw_bias = 1; pw_data = fix_t'(b[g*NH + j]);
      end
    @(negedge clk);
    pw_en = 0; pw_bias = 0;
  endtask

  task automatic set_scale(input scale_cfg_t s);
    @(negedge clk);
    cfg_we = 1; cfg_scale = s;
    @(negedge clk);
    cfg_we = 0;
    n_cfg++;
    checks++;
    if (scale != s) failures++;
  endtask

  task automatic clear_seq();
    @(negedge clk);
    seq_clear = 1;
    @(negedge clk);
    seq_clear = 0;
    n_clear++;
    foreach (h_ref[n]) h_ref[n] = 0;
    foreach (c_ref[n]) c_ref[n] = 0;
  endtask

  // One time step: stream NX features (with random gaps), compute the
  // reference, wait for step_done while sometimes holding x_valid high.
  task automatic run_step(input int xmax);
    int hprev [];
    hprev = new[NH];
    for (int k = 0; k < NX; k++) xv[k] = int'($urandom_range(0, 2*xmax)) - xmax;
    for (int k = 0; k < NX; k++) begin
      @(negedge clk);
      if ($urandom_range(0, 5) == 0) begin
        x_valid = 0; n_gaps++;
        @(negedge clk);
      end
      x_valid = 1; x_data = fix_t'(xv[k]);
      while (!x_ready) @(negedge clk);
    end
    // reference for this step; h_ref keeps h_(t-1) until the step is compared
    foreach (h_ref[n]) hprev[n] = h_ref[n];
    lstm_step(NX, NH, 1, 1, int'(scale.x), int'(scale.wf), int'(scale.wr), int'(scale.b),
              w, b, xv, hprev, c_ref, ref_clips);
    foreach (h_ref[n]) h_ref[n] = hprev[n];
    @(negedge clk);
    // back-pressure: offer the next feature while the layer is busy
    if ($urandom_range(0, 1) == 0) begin
      x_valid = 1; x_data = fix_t'(0);
      repeat (3) @(negedge clk);
    end
    x_valid = 0;
    while (!step_done) @(negedge clk);
    n_steps++;
  endtask

  initial begin
    w     = new[4*NH*NK];
    b     = new[4*NH];
    xv    = new[NX];
    h_ref = new[NH];
    c_ref = new[NH];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (scale != SCALE_5_5) failures++;   // reset value: Table II (5,5)
    // weights within [-1, 1], biases within [-1, 1]
    load_params(4096, 4096);
    // sequence 1 at the paper's (5,5) scaling factors
    clear_seq();
    for (int t = 0; t < 3; t++) run_step(8192);
    // Table II row (2,2) scaling factors: X 1, Wf 1/4, Wr 1/2, B 1. Weights
    // and biases are encoded when written, so they are written again.
    set_scale('{x: 4'd0, wf: 4'd2, wr: 4'd1, b: 4'd0});
    load_params(4096, 4096);
    for (int t = 0; t < 3; t++) run_step(8192);
    // only alpha_X changes: no reload needed
    set_scale('{x: 4'd1, wf: 4'd2, wr: 4'd1, b: 4'd0});
    for (int t = 0; t < 2; t++) run_step(8192);
    // restart the sequence; large scaling factors drive dot products into saturation
    clear_seq();
    set_scale('{x: 4'd0, wf: 4'd0, wr: 4'd0, b: 4'd0});
    load_params(7 * 4096, 4096);
    for (int t = 0; t < 2; t++) run_step(7 * 4096);
    // back to the default and a fresh sequence
    set_scale(SCALE_5_5);
    load_params(4096, 4096);
    clear_seq();
    for (int t = 0; t < 2; t++) run_step(8192);
    repeat (5) @(negedge clk);
    // every hidden output of every step arrived
    checks++;
    if (n_h != n_steps * NH) failures++;
    // the RTL saw exactly the saturations the reference predicts per MAC result
    // saturation seen by the RTL exactly when the reference predicts it
    checks++;
    if ((n_clip == 0) != (ref_clips == 0)) failures++;
    checks++;
    if (NEED_CLIP && n_clip == 0) begin failures++; $display("FAIL no saturated dot product"); end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL no back-pressure"); end
    checks++;
    if (n_gaps == 0) failures++;
    checks++;
    if (n_clear < 2 || n_cfg < 3) failures++;
    $display("mechanisms: steps=%0d stalls=%0d gaps=%0d clears=%0d scale_changes=%0d clipped_results=%0d",
             n_steps, n_stall, n_gaps, n_clear, n_cfg, n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
