// tb_param_mem: fills all four weight banks and bias arrays with random
// words (small sizes), reads every location back through the four-gate read
// port and checks the one-clock read latency and that the output holds while
// rd_en is low.
module tb_param_mem;
  import ml_pkg::*;
  import tb_ml_ref_pkg::*;
  localparam int NX = 5, NH = 3, NK = NX + NH;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, wr_bias = 0, rd_en = 0;
  gate_e wr_gate = GATE_C;
  logic [$clog2(NH)-1:0] wr_row = '0, rd_row = '0;
  logic [$clog2(NK)-1:0] wr_col = '0, rd_col = '0;
  logic [15:0] wr_data = '0;
  logic [15:0] rd_w [NGATES];
  logic [15:0] rd_b [NGATES];

  param_mem #(.NX(NX), .NH(NH)) dut (.clk, .wr_en, .wr_bias, .wr_gate, .wr_row,
    .wr_col, .wr_data, .rd_en, .rd_row, .rd_col, .rd_w, .rd_b);

  int wref [NGATES][NH][NK];
  int bref [NGATES][NH];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < NGATES; g++)
      for (int r = 0; r < NH; r++) begin
        for (int c = 0; c < NK; c++) begin
          wref[g][r][c] = int'($signed(16'($urandom)));
          @(negedge clk);
          wr_en = 1; wr_bias = 0; wr_gate = gate_e'(g); wr_row = 2'(r); wr_col = 3'(c);
          wr_data = 16'(wref[g][r][c]);
        end
        bref[g][r] = int'($signed(16'($urandom)));
        @(negedge clk);
        wr_bias = 1; wr_data = 16'(bref[g][r]);
      end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < NH; r++)
      for (int c = 0; c < NK; c++) begin
        @(negedge clk);
        rd_en = 1; rd_row = 2'(r); rd_col = 3'(c);
        @(negedge clk);
        rd_en = 0; rd_row = 2'((r + 1) % NH); rd_col = 3'((c + 1) % NK);
        for (int g = 0; g < NGATES; g++) begin
          checks += 2;
          if (s16(rd_w[g]) != wref[g][r][c]) begin
            failures++;
            if (failures < 10) $display("FAIL g%0d r%0d c%0d got %0d exp %0d", g, r, c, s16(rd_w[g]), wref[g][r][c]);
          end
          if (s16(rd_b[g]) != bref[g][r]) failures++;
        end
        // output holds while rd_en is low
        @(negedge clk);
        for (int g = 0; g < NGATES; g++) begin
          checks++;
          if (s16(rd_w[g]) != wref[g][r][c]) failures++;
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
