// tb_ml_acc: random dot products of code products, back to back and with
// gaps, random gamma. Reference: exact integer sum scaled by
// 2^(12 - gamma - 8), rounded down and clipped. Also checks that each result
// appears exactly one clock after its last product and that saturation is
// flagged.
module tb_ml_acc;
  import ml_pkg::*;
  import tb_ml_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, first = 0, last = 0;
  logic signed [11:0] prod = 0;
  logic [SHIFT_W:0] gsh = 0;
  logic out_valid, out_sat;
  fix_t out;

  ml_acc #(.PW(12), .ACC_W(24), .NLA(5), .NLB(5)) dut (
    .clk, .rst_n, .in_valid, .first, .last, .prod, .gamma_shift(gsh),
    .out_valid, .out, .out_sat);

  int  exp_q[$];
  int  exp_sat_q[$];
  int  cyc = 0, last_cyc = -10, n_results = 0, n_sat = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      checks += 3;
      if (exp_q.size() == 0) failures++;
      else begin
        int e, es;
        e  = exp_q.pop_front();
        es = exp_sat_q.pop_front();
        if (s16(out) != e) begin
          failures++;
          if (failures < 10) $display("FAIL got %0d exp %0d", s16(out), e);
        end
        if (int'(out_sat) != es) failures++;
        if (cyc != last_cyc + 1) begin
          failures++;
          $display("FAIL latency: out at %0d, last at %0d", cyc, last_cyc);
        end
        n_results++;
        n_sat += es;
      end
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int len, g, big;
      longint sum;
      real v;
      len = $urandom_range(1, 70);
      g   = $urandom_range(0, 12);
      big = (t % 10 == 0);
      sum = 0;
      for (int n = 0; n < len; n++) begin
        int p;
        p = big ? 961 : $urandom_range(0, 1922) - 961;
        @(negedge clk);
        in_valid = 1; first = (n == 0); last = (n == len - 1);
        prod = 12'(p); gsh = 5'(g);
        sum += p;
        if (n == len - 1) begin
          v = real'(sum) * (2.0 ** (12 - g - 8)) / ONE;
          exp_q.push_back(to_fix(v));
          exp_sat_q.push_back(($floor(v * ONE) > 32767.0 || $floor(v * ONE) < -32768.0) ? 1 : 0);
          last_cyc = cyc;
        end
        // occasional idle cycle inside a dot product
        if ($urandom_range(0, 7) == 0) begin
          @(negedge clk); in_valid = 0;
        end
      end
      @(negedge clk); in_valid = 0;
    end
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_results != 400) failures++;
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
