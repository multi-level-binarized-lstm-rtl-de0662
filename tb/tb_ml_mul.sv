// tb_ml_mul: exhaustive check of the code multiplier for (5,5), (3,5) and
// (1,1) levels. The reference decodes each code level by level
// (sum of +-2^(NL-i)) and multiplies.
module tb_ml_mul;
  int checks = 0, failures = 0;

  logic [4:0] a5, b5;
  logic [2:0] a3;
  logic [0:0] a1, b1;
  logic signed [11:0] p55;
  logic signed [9:0]  p35;
  logic signed [3:0]  p11;

  ml_mul #(.NLA(5), .NLB(5)) dut55 (.la(a5), .lb(b5), .prod(p55));
  ml_mul #(.NLA(3), .NLB(5)) dut35 (.la(a3), .lb(b5), .prod(p35));
  ml_mul #(.NLA(1), .NLB(1)) dut11 (.la(a1), .lb(b1), .prod(p11));

  function automatic int dec(input int code, input int nl);
    int v = 0;
    for (int i = 0; i < nl; i++)
      v += (((code >> (nl - 1 - i)) & 1) != 0) ? (1 << (nl - 1 - i)) : -(1 << (nl - 1 - i));
    return v;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 32; a++)
      for (int b = 0; b < 32; b++) begin
        a5 = 5'(a); b5 = 5'(b); a3 = 3'(a); #1;
        checks++;
        if (int'(p55) != dec(a, 5) * dec(b, 5)) begin
          failures++;
          if (failures < 10) $display("FAIL 5x5 %0d %0d got %0d", a, b, p55);
        end
        if (a < 8) begin
          checks++;
          if (int'(p35) != dec(a, 3) * dec(b, 5)) failures++;
        end
      end
    // 1-level case is the XNOR of Fig. 2: +1 when the bits agree
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        a1 = 1'(a); b1 = 1'(b); #1;
        checks++;
        if (int'(p11) != ((a == b) ? 1 : -1)) failures++;
      end
    // extremes: ML = +-31
    a5 = '1; b5 = '0; #1; checks++; if (p55 != -12'sd961) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
