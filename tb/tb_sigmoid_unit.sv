// tb_sigmoid_unit: sweeps every Q4.12 input and compares with the hard
// sigmoid of Eq. 11 computed in real arithmetic; checks the two clip points.
module tb_sigmoid_unit;
  import ml_pkg::*;
  import tb_ml_ref_pkg::*;
  int checks = 0, failures = 0;
  fix_t x, y;
  sigmoid_unit dut (.x, .y);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      x = fix_t'(v); #1;
      checks++;
      if (s16(y) != hsig(v)) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d y=%0d exp %0d", v, s16(y), hsig(v));
      end
    end
    x = fix_t'(0);     #1; checks++; if (y != 16'sd2048) failures++;   // sigma(0) = 1/2
    x = fix_t'(4096);  #1; checks++; if (y != 16'sd4096) failures++;   // sigma(1) = 1
    x = fix_t'(-4096); #1; checks++; if (y != 16'sd0)    failures++;   // sigma(-1) = 0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
