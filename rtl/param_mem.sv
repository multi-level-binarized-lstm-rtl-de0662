// param_mem: on-chip storage of the LSTM gate weights and biases.
//
// The paper's cell has four weight matrices (W_c, W_f, W_i, W_o), each the
// concatenation of a forward part (NH x NX, multiplied with x_t) and a
// recurrent part (NH x NH, multiplied with h_(t-1)), and four bias vectors
// (Sec. IV-C). This memory keeps them as four banks, one per gate, so that
// the four gate MACs each receive their weight in the same cycle. A bank row
// j holds the NX+NH weights of hidden unit j, forward part first (column k <
// NX), recurrent part after it (column NX + k'). Bias vectors sit in four
// small separate arrays.
//
// The stored word is WW bits wide. The layer stores multi-level codes
// (WW = levels, 5 bits by default) rather than 16-bit values, which is where
// binarization saves parameter memory; the default WW = DATA_W holds plain
// Q4.12 words. Organisation, word format and ports are this design's
// choices: the paper only states which parameters exist.
//
// Ports: one write port (wr_en, wr_bias selects the bias arrays, wr_gate,
// wr_row, wr_col, wr_data) and one read port that returns all four gates at
// once. Reads are synchronous: rd_w/rd_b show the word addressed in the
// cycle rd_en is high one clock later and hold it until the next read.
module param_mem
  import ml_pkg::*;
#(
  parameter int NX = 32,  // input features per time step
  parameter int NH = 32,  // hidden units
  parameter int WW = DATA_W  // stored word width
) (
  input  logic                      clk,
  // write port
  input  logic                      wr_en,
  input  logic                      wr_bias,
  input  gate_e                     wr_gate,
  input  logic [$clog2(NH)-1:0]     wr_row,
  input  logic [$clog2(NX+NH)-1:0]  wr_col,
  input  logic [WW-1:0]             wr_data,
  // read port: all four gates of (rd_row, rd_col) plus the four biases of rd_row
  input  logic                      rd_en,
  input  logic [$clog2(NH)-1:0]     rd_row,
  input  logic [$clog2(NX+NH)-1:0]  rd_col,
  output logic [WW-1:0]             rd_w [NGATES],
  output logic [WW-1:0]             rd_b [NGATES]
);

  localparam int NK    = NX + NH;
  localparam int DEPTH = NH * NK;
  localparam int AW    = $clog2(DEPTH);

  logic [WW-1:0] wbank [NGATES][DEPTH];
  logic [WW-1:0] bbank [NGATES][NH];

  logic [AW-1:0] wr_addr, rd_addr;

  assign wr_addr = AW'(wr_row) * AW'(NK) + AW'(wr_col);
  assign rd_addr = AW'(rd_row) * AW'(NK) + AW'(rd_col);

  always_ff @(posedge clk) begin
    if (wr_en && !wr_bias) wbank[wr_gate][wr_addr] <= wr_data;
    if (wr_en &&  wr_bias) bbank[wr_gate][wr_row]  <= wr_data;
  end

  for (genvar g = 0; g < NGATES; g++) begin : g_bank
    always_ff @(posedge clk) begin
      if (rd_en) begin
        rd_w[g] <= wbank[g][rd_addr];
        rd_b[g] <= bbank[g][rd_row];
      end
    end
  end

endmodule
