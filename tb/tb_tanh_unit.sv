// tb_tanh_unit: sweeps every Q4.12 input and compares with clip(x, -1, 1).
module tb_tanh_unit;
  import ml_pkg::*;
  import tb_ml_ref_pkg::*;
  int checks = 0, failures = 0;
  fix_t x, y;
  tanh_unit dut (.x, .y);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      real r;
      x = fix_t'(v); #1;
      r = real'(v) / ONE;
      r = (r > 1.0) ? 1.0 : (r < -1.0) ? -1.0 : r;
      checks++;
      if (s16(y) != to_fix(r)) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d y=%0d", v, s16(y));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
