// linear_layer: one fully connected layer of the INR network.
//
// Computes, for each output neuron j, y_j = phi(sum_i W[j][i]*a_i + b_j),
// with phi the quadratic activation (HAS_AF=1, the hidden layers) or no
// activation (HAS_AF=0, the output layer, whose words go to the result RAM).
// It holds the two memories the paper gives a linear layer: the weight & bias
// RAM and the intermediate RAM with this layer's input vector a. The whole
// vector a meets one weight row per cycle in the MAC array (IN_DIM parallel
// FP32 multipliers); the adder tree reduces the IN_DIM products to one sum,
// one more FP32 adder adds the bias, and the activation follows. One output
// neuron is therefore produced per clock.
//
// Timing: a row request (row_en, row) on one edge produces out_valid with
// out_addr = row and out_data = y_row exactly
// layer_latency(IN_DIM, HAS_AF) cycles later (1 RAM + 1 multiply +
// log2(IN_DIM) tree + 1 bias + 2 activation). Requests may come every cycle.
// The input RAM is written through in_we/in_bank/in_addr/in_data and read
// from bank rd_bank, which must stay stable while requests are in flight.
//
// Structure (MAC array, 256-input tree, two RAMs, activation between layers)
// follows the paper; the bias adder after the tree, the register placement
// and the bank scheme are this design's choices.
module linear_layer
  import quadinr_pkg::*;
#(
  parameter int unsigned IN_DIM   = HIDDEN_DIM,
  parameter int unsigned OUT_ROWS = HIDDEN_DIM,
  parameter bit          HAS_AF   = 1'b1,
  parameter bit          PERIODIC = 1'b1,
  localparam int unsigned RW      = clog2_min1(OUT_ROWS),
  localparam int unsigned CW      = clog2_min1(IN_DIM + 1),
  localparam int unsigned IW      = clog2_min1(IN_DIM)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host write into the weight & bias RAM
  input  logic          wb_en,
  input  logic [RW-1:0] wb_row,
  input  logic [CW-1:0] wb_col,
  input  fp32_t         wb_data,
  // activation writes from the previous layer
  input  logic          in_we,
  input  logic          in_bank,
  input  logic [IW-1:0] in_addr,
  input  fp32_t         in_data,
  input  logic          rd_bank,
  // row requests from the memory controller
  input  logic          row_en,
  input  logic [RW-1:0] row,
  // results
  output logic          out_valid,
  output logic [RW-1:0] out_addr,
  output fp32_t         out_data
);

  localparam int unsigned TW = 32 + RW;   // tag: bias and row number

  // ---- memories ----
  fp32_t act [IN_DIM];
  fp32_t wrow [IN_DIM];
  fp32_t bias;

  intermediate_ram #(.DEPTH(IN_DIM)) u_in_ram (
    .clk    (clk),
    .wr_en  (in_we),
    .wr_bank(in_bank),
    .wr_addr(in_addr),
    .wr_data(in_data),
    .rd_bank(rd_bank),
    .rd_vec (act)
  );

  weight_bias_ram #(.ROWS(OUT_ROWS), .COLS(IN_DIM)) u_wb_ram (
    .clk    (clk),
    .wr_en  (wb_en),
    .wr_row (wb_row),
    .wr_col (wb_col),
    .wr_data(wb_data),
    .rd_en  (row_en),
    .rd_row (row),
    .rd_w   (wrow),
    .rd_b   (bias)
  );

  logic          r_valid;
  logic [RW-1:0] r_row;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid <= 1'b0;
      r_row   <= '0;
    end else begin
      r_valid <= row_en;
      r_row   <= row;
    end
  end

  // ---- MAC array and adder tree ----
  fp32_t          prod [IN_DIM];
  logic           m_valid;
  logic [TW-1:0]  m_tag;

  mac_array #(.N(IN_DIM), .TAG_W(TW)) u_mac (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (r_valid),
    .act      (act),
    .w        (wrow),
    .in_tag   ({bias, r_row}),
    .out_valid(m_valid),
    .prod     (prod),
    .out_tag  (m_tag)
  );

  fp32_t         tsum;
  logic          t_valid;
  logic [TW-1:0] t_tag;

  fp_adder_tree #(.N(IN_DIM), .TAG_W(TW)) u_tree (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (m_valid),
    .in       (prod),
    .in_tag   (m_tag),
    .out_valid(t_valid),
    .sum      (tsum),
    .out_tag  (t_tag)
  );

  // ---- bias adder ----
  fp32_t         bsum, z;
  logic          z_valid;
  logic [RW-1:0] z_row;
  fp32_add u_bias (.a(tsum), .b(t_tag[TW-1 -: 32]), .y(bsum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_valid <= 1'b0;
      z_row   <= '0;
      z       <= FP_ZERO;
    end else begin
      z_valid <= t_valid;
      z_row   <= t_tag[RW-1:0];
      z       <= bsum;
    end
  end

  // ---- activation (hidden layers) ----
  if (HAS_AF) begin : g_af
    quad_af #(.PERIODIC(PERIODIC), .TAG_W(RW)) u_af (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (z_valid),
      .x        (z),
      .in_tag   (z_row),
      .out_valid(out_valid),
      .y        (out_data),
      .out_tag  (out_addr)
    );
  end else begin : g_no_af
    assign out_valid = z_valid;
    assign out_data  = z;
    assign out_addr  = z_row;
  end

endmodule
