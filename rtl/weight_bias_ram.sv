// weight_bias_ram: one layer's weight and bias memory.
//
// Holds ROWS rows (one per output neuron) of COLS weights plus one bias. A
// read returns a whole row, all COLS weights and the bias, one clock after
// rd_en/rd_row, so the MAC array can consume one neuron per cycle (the
// synchronous read of a block RAM). The host writes one 32-bit word per
// cycle: wr_col < COLS addresses a weight, wr_col == COLS the bias.
//
// The paper names this memory (Weight & Bias BRAM) and says it is read under
// the memory controller's control; the row-wide read and the word-wide host
// write port are this design's choices.
module weight_bias_ram
  import quadinr_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 256,
  localparam int unsigned RW  = clog2_min1(ROWS),
  localparam int unsigned CW  = clog2_min1(COLS + 1),
  localparam int unsigned IW  = clog2_min1(COLS)
) (
  input  logic          clk,
  // host write port
  input  logic          wr_en,
  input  logic [RW-1:0] wr_row,
  input  logic [CW-1:0] wr_col,
  input  fp32_t         wr_data,
  // row read port, one cycle latency
  input  logic          rd_en,
  input  logic [RW-1:0] rd_row,
  output fp32_t         rd_w [COLS],
  output fp32_t         rd_b
);

  fp32_t wmem [ROWS][COLS];
  fp32_t bmem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_row) < int'(ROWS)) begin
      if (int'(wr_col) < int'(COLS)) wmem[wr_row][IW'(wr_col)] <= wr_data;
      else                           bmem[wr_row]         <= wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_w <= wmem[rd_row];
      rd_b <= bmem[rd_row];
    end
  end

endmodule
