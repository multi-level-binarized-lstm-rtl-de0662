// tb_ml_encoder: checks the residual binarization against a real-valued model
// for 1, 3, 4 and 5 levels, all scaling factors 1 .. 1/16 and a sweep plus
// random inputs over the whole Q4.12 range. Also checks one hand-worked
// value: x = 0.3, alpha = 1/2, 5 levels -> +,-,+,-,- = 5'b10100.
module tb_ml_encoder;
  import ml_pkg::*;
  import tb_ml_ref_pkg::*;

  int checks = 0, failures = 0;

  fix_t x;
  logic [SHIFT_W-1:0] sh;
  logic [4:0] l5;
  logic [3:0] l4;
  logic [2:0] l3;
  logic [0:0] l1;

  ml_encoder #(.NL(5)) dut5 (.x(x), .alpha_shift(sh), .levels(l5));
  ml_encoder #(.NL(4)) dut4 (.x(x), .alpha_shift(sh), .levels(l4));
  ml_encoder #(.NL(3)) dut3 (.x(x), .alpha_shift(sh), .levels(l3));
  ml_encoder #(.NL(1)) dut1 (.x(x), .alpha_shift(sh), .levels(l1));

  task automatic check_one(input int xv, input int s);
    x  = fix_t'(xv);
    sh = SHIFT_W'(s);
    #1;
    checks += 4;
    if (int'(l5) != enc_bits(xv, s, 5)) begin
      failures++;
      if (failures < 10) $display("FAIL nl=5 x=%0d sh=%0d got %b exp %b", xv, s, l5, enc_bits(xv, s, 5));
    end
    if (int'(l4) != enc_bits(xv, s, 4)) failures++;
    if (int'(l3) != enc_bits(xv, s, 3)) failures++;
    if (int'(l1) != enc_bits(xv, s, 1)) failures++;
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // hand-worked: 0.3 ~ 1229/4096; r: .3 -> -.2 -> .05 -> -.075 -> -.0125 -> ...
    // levels: +(.3>=0) -(-.2) +(.05) -(-.075) -(-.0125) = 10100
    x = fix_t'(1229); sh = 1; #1;
    checks++;
    if (l5 !== 5'b10100) begin failures++; $display("FAIL hand-worked got %b", l5); end
    // Sign-only level: 1 level is the conventional sign binarization (Eq. 12)
    x = fix_t'(0); #1; checks++; if (l1 !== 1'b1) failures++;
    x = fix_t'(-1); #1; checks++; if (l1 !== 1'b0) failures++;
    for (int s = 0; s <= 4; s++)
      for (int xv = -32768; xv < 32768; xv += 97) check_one(xv, s);
    for (int n = 0; n < 5000; n++)
      check_one(int'($signed(16'($urandom))), int'($urandom_range(0, 7)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
