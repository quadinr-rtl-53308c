// input_layer: first layer of the INR network, coordinates to features.
//
// Maps the 2-D pixel coordinate (x, y) to ROWS features,
//   h_j = phi(W[j][0]*x + W[j][1]*y + b_j),
// one feature per clock. Like a linear layer but with only two inputs, it
// has its own weight & bias RAM, two FP32 multipliers, a two-input adder
// tree, a bias adder and a quadratic activation unit. The coordinate is held
// by the coordinate generator for the whole schedule epoch, so no input RAM
// is needed.
//
// Timing: a row request (row_en, row) produces out_valid/out_addr=row/
// out_data=h_row layer_latency(2, 1) = 6 cycles later. x and y are sampled
// one cycle after the request (when the weight row arrives).
//
// The paper gives the structure (weight & bias BRAM, two multipliers, adder
// tree, activation); register placement and the bias adder are this
// design's choices.
module input_layer
  import quadinr_pkg::*;
#(
  parameter int unsigned ROWS     = HIDDEN_DIM,
  parameter bit          PERIODIC = 1'b1,
  localparam int unsigned RW      = clog2_min1(ROWS),
  localparam int unsigned CW      = clog2_min1(COORD_DIM + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wb_en,
  input  logic [RW-1:0] wb_row,
  input  logic [CW-1:0] wb_col,
  input  fp32_t         wb_data,
  input  fp32_t         x,
  input  fp32_t         y,
  input  logic          row_en,
  input  logic [RW-1:0] row,
  output logic          out_valid,
  output logic [RW-1:0] out_addr,
  output fp32_t         out_data
);

  localparam int unsigned TW = 32 + RW;

  fp32_t wrow [COORD_DIM];
  fp32_t bias;
  fp32_t coord [COORD_DIM];

  assign coord[0] = x;
  assign coord[1] = y;

  weight_bias_ram #(.ROWS(ROWS), .COLS(COORD_DIM)) u_wb_ram (
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

  // Two multipliers.
  fp32_t         prod [COORD_DIM];
  logic          m_valid;
  logic [TW-1:0] m_tag;
  mac_array #(.N(COORD_DIM), .TAG_W(TW)) u_mul (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (r_valid),
    .act      (coord),
    .w        (wrow),
    .in_tag   ({bias, r_row}),
    .out_valid(m_valid),
    .prod     (prod),
    .out_tag  (m_tag)
  );

  // Adder tree.
  fp32_t         tsum;
  logic          t_valid;
  logic [TW-1:0] t_tag;
  fp_adder_tree #(.N(COORD_DIM), .TAG_W(TW)) u_tree (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (m_valid),
    .in       (prod),
    .in_tag   (m_tag),
    .out_valid(t_valid),
    .sum      (tsum),
    .out_tag  (t_tag)
  );

  // Bias adder.
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

  // Activation.
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

endmodule
