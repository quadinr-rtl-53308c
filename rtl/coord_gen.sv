// coord_gen: pixel coordinate generator feeding the input layer.
//
// Walks the image in raster order (col fastest) and presents the FP32
// coordinates of the current pixel, normalised to [-1, 1]:
//   x = (2*col - (W-1)) * (1/(W-1)),   y = (2*row - (H-1)) * (1/(H-1)).
// The odd integer 2*col-(W-1) is converted to FP32 exactly, then one FP32
// multiply by the constant 1/(W-1) (rounded to FP32 at elaboration) gives
// the coordinate, so each coordinate carries a single rounding.
//
// The paper only names this block ("Coordinated Generator") and gives the
// 768x512 image size; the [-1, 1] normalisation and raster order are this
// design's choices, following common INR practice.
//
// Interface: clear returns to pixel (0,0); advance steps to the next pixel.
// x/y/col/row are registered and show the new pixel one cycle after the
// counters change (two cycles after clear/advance for x and y).
module coord_gen
  import quadinr_pkg::*;
#(
  parameter int unsigned W  = IMG_W,
  parameter int unsigned H  = IMG_H,
  localparam int unsigned XW = clog2_min1(W),
  localparam int unsigned YW = clog2_min1(H)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          advance,
  output logic [XW-1:0] col,
  output logic [YW-1:0] row,
  output fp32_t         x,
  output fp32_t         y
);

  localparam fp32_t INV_W = real_to_fp32((W > 1) ? 1.0 / real'(W - 1) : 1.0);
  localparam fp32_t INV_H = real_to_fp32((H > 1) ? 1.0 / real'(H - 1) : 1.0);

  // Exact conversion of a small signed integer (|v| < 2^24) to FP32.
  function automatic fp32_t int_to_fp32(input logic signed [24:0] v);
    logic [24:0] mag;
    int          msb;
    logic [24:0] norm;
    mag = v[24] ? 25'(-v) : 25'(v);
    if (mag == 25'd0) return FP_ZERO;
    msb = 0;
    for (int i = 0; i < 25; i++) if (mag[i]) msb = i;
    norm = mag << (23 - msb);
    return {v[24], 8'(127 + msb), norm[22:0]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col <= '0;
      row <= '0;
    end else if (clear) begin
      col <= '0;
      row <= '0;
    end else if (advance) begin
      if (int'(col) == int'(W) - 1) begin
        col <= '0;
        row <= (int'(row) == int'(H) - 1) ? '0 : row + 1'b1;
      end else begin
        col <= col + 1'b1;
      end
    end
  end

  logic signed [24:0] xi, yi;
  fp32_t xf, yf, xc, yc;
  assign xi = 25'(2 * int'(col) - (int'(W) - 1));
  assign yi = 25'(2 * int'(row) - (int'(H) - 1));
  assign xf = int_to_fp32(xi);
  assign yf = int_to_fp32(yi);

  fp32_mul u_mul_x (.a(xf), .b(INV_W), .y(xc));
  fp32_mul u_mul_y (.a(yf), .b(INV_H), .y(yc));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= FP_ZERO;
      y <= FP_ZERO;
    end else begin
      x <= xc;
      y <= yc;
    end
  end

endmodule
