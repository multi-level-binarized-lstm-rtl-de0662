// tb_ml_mac: end-to-end check of the MAC unit of Fig. 3 for three level
// configurations of Table II: (5,5) with X = 1/2, W = 1/4; (3,5) with
// X = 1/2, W = 1/2; (1,1) with X = 1/2, W = 1/8. Random input and weight
// vectors of random length; the reference binarizes both in real arithmetic,
// forms the exact dot product of the approximations and rounds it down to
// Q4.12. Also checks the one-cycle result latency of back-to-back products.
// A fourth (5,5) instance is built with W_CODED = 1 and receives the weight
// as a code made by the reference encoder; it must agree with the first.
module tb_ml_mac;
  import ml_pkg::*;
  import tb_ml_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, first = 0, last = 0;
  fix_t x = '0, w = '0;
  logic [SHIFT_W-1:0] ax [3], aw [3];
  logic ov [3], os [3];
  fix_t o [3];
  logic [4:0] wml;
  logic ovc, osc;
  fix_t oc;

  localparam int NA [3] = '{5, 3, 1};
  localparam int NB [3] = '{5, 5, 1};

  ml_mac #(.NLA(5), .NLB(5)) dut55 (.clk, .rst_n, .in_valid, .first, .last, .x, .w, .w_ml_in('0),
    .ax_shift(ax[0]), .aw_shift(aw[0]), .out_valid(ov[0]), .out(o[0]), .out_sat(os[0]));
  ml_mac #(.NLA(3), .NLB(5)) dut35 (.clk, .rst_n, .in_valid, .first, .last, .x, .w, .w_ml_in('0),
    .ax_shift(ax[1]), .aw_shift(aw[1]), .out_valid(ov[1]), .out(o[1]), .out_sat(os[1]));
  ml_mac #(.NLA(1), .NLB(1)) dut11 (.clk, .rst_n, .in_valid, .first, .last, .x, .w, .w_ml_in('0),
    .ax_shift(ax[2]), .aw_shift(aw[2]), .out_valid(ov[2]), .out(o[2]), .out_sat(os[2]));

  ml_mac #(.NLA(5), .NLB(5), .W_CODED(1'b1)) dutc (.clk, .rst_n, .in_valid, .first, .last,
    .x, .w('0), .w_ml_in(wml), .ax_shift(ax[0]), .aw_shift(aw[0]),
    .out_valid(ovc), .out(oc), .out_sat(osc));

  always @(posedge clk)
    if (rst_n && ovc) begin
      checks++;
      if (!ov[0] || oc != o[0]) begin
        failures++;
        if (failures < 10) $display("FAIL coded-weight MAC got %0d exp %0d", s16(oc), s16(o[0]));
      end
    end

  int exp_q [3][$];
  int cyc = 0;
  int last_q [3][$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int d = 0; d < 3; d++)
      if (rst_n && ov[d]) begin
        checks += 2;
        if (exp_q[d].size() == 0) failures++;
        else begin
          int e;
          e = exp_q[d].pop_front();
          if (s16(o[d]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL cfg%0d got %0d exp %0d", d, s16(o[d]), e);
          end
        end
        if (last_q[d].size() == 0) failures++;
        else if (cyc != last_q[d].pop_front() + 1) begin
          failures++;
          if (failures < 10) $display("FAIL latency cfg%0d", d);
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
    ax = '{4'd1, 4'd1, 4'd1};
    aw = '{4'd2, 4'd1, 4'd3};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int  len;
      real acc [3];
      len = $urandom_range(1, 64);
      acc = '{0.0, 0.0, 0.0};
      for (int n = 0; n < len; n++) begin
        int xv, wv;
        // inputs span about [-2, 2], weights about [-1, 1]
        xv = int'($urandom_range(0, 16384)) - 8192;
        wv = int'($urandom_range(0, 8192)) - 4096;
        @(negedge clk);
        in_valid = 1; first = (n == 0); last = (n == len - 1);
        x = fix_t'(xv); w = fix_t'(wv); wml = 5'(enc_bits(wv, int'(aw[0]), 5));
        for (int d = 0; d < 3; d++)
          acc[d] += enc_real(xv, int'(ax[d]), NA[d]) * enc_real(wv, int'(aw[d]), NB[d]);
        if (n == len - 1) begin
          for (int d = 0; d < 3; d++) exp_q[d].push_back(to_fix(acc[d]));
          for (int d = 0; d < 3; d++) last_q[d].push_back(cyc);
        end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    for (int d = 0; d < 3; d++) begin
      checks++;
      if (exp_q[d].size() != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
