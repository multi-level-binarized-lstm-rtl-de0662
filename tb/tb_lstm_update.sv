// tb_lstm_update: random gate values, candidates and cell states, including
// large states that drive the cell through saturation and the hard tanh into
// its clip. Reference: Eq. 7-8 in real arithmetic, rounded down to Q4.12.
// Checks the one-clock latency.
module tb_lstm_update;
  import ml_pkg::*;
  import tb_ml_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, out_valid;
  fix_t f = '0, i = '0, o = '0, m = '0, c_prev = '0, c_new, h_new;

  lstm_update dut (.clk, .rst_n, .in_valid, .f, .i, .o, .m, .c_prev,
                   .out_valid, .c_new, .h_new);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_clip = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int fv, iv, ov, mv, cv, ce, he;
      fv = $urandom_range(0, 4096);
      iv = $urandom_range(0, 4096);
      ov = $urandom_range(0, 4096);
      mv = int'($urandom_range(0, 8192)) - 4096;
      cv = (t % 3 == 0) ? int'($signed(16'($urandom))) : int'($urandom_range(0, 16384)) - 8192;
      @(negedge clk);
      in_valid = 1; f = fix_t'(fv); i = fix_t'(iv); o = fix_t'(ov); m = fix_t'(mv);
      c_prev = fix_t'(cv);
      lstm_upd(fv, iv, ov, mv, cv, ce, he);
      @(posedge clk); #1;
      checks += 3;
      if (!out_valid) failures++;
      if (s16(c_new) != ce || s16(h_new) != he) begin
        failures++;
        if (failures < 10) $display("FAIL f=%0d i=%0d o=%0d m=%0d c=%0d got c=%0d h=%0d exp c=%0d h=%0d",
                                    fv, iv, ov, mv, cv, s16(c_new), s16(h_new), ce, he);
      end
      if (ce > 4096 || ce < -4096) n_clip++;
      @(negedge clk); in_valid = 0;
      @(posedge clk); #1;
      if (out_valid) failures++;
    end
    checks++;
    if (n_clip == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
