// tb_coord_gen: self-checking test of the pixel coordinate generator.
//
// Steps through the whole default 768 x 512 image in raster order and checks
// col/row and the FP32 coordinates x = (2col-767)/767, y = (2row-511)/511
// (each with one rounding: the constant 1/767 or 1/511 is rounded to FP32,
// the product rounded again) at every pixel, the first and last values
// exactly, the wrap back to pixel (0,0) and the clear input.
module tb_coord_gen;
  import tb_fp_pkg::*;

  localparam int W = 768, H = 512;

  logic        clk = 0, rst_n = 0, clear = 0, advance = 0;
  logic [9:0]  col;
  logic [8:0]  row;
  logic [31:0] x, y;
  int checks = 0, failures = 0;
  logic [31:0] inv_w, inv_h;

  coord_gen dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .advance(advance),
    .col(col), .row(row), .x(x), .y(y)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_pixel(input int c, input int r);
    logic [31:0] ex, ey;
    ex = to_f32(real'(2 * c - (W - 1)) * to_real(inv_w));
    ey = to_f32(real'(2 * r - (H - 1)) * to_real(inv_h));
    checks += 3;
    if (col != 10'(c) || row != 9'(r)) begin
      failures++;
      if (failures < 10) $display("FAIL counters (%0d,%0d) expected (%0d,%0d)", col, row, c, r);
    end
    if (x !== ex) begin
      failures++;
      if (failures < 10) $display("FAIL x at col %0d: %h expected %h", c, x, ex);
    end
    if (y !== ey) begin
      failures++;
      if (failures < 10) $display("FAIL y at row %0d: %h expected %h", r, y, ey);
    end
  endtask

  initial begin
    inv_w = to_f32(1.0 / 767.0);
    inv_h = to_f32(1.0 / 511.0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    clear = 1;
    @(negedge clk);
    clear = 0;
    @(negedge clk);
    check_pixel(0, 0);
    // First and last coordinates are -1 and +1 within one rounding.
    checks += 2;
    if (to_real(x) > -0.9999999 || to_real(x) < -1.0000001) failures++;
    if (to_real(y) > -0.9999999 || to_real(y) < -1.0000001) failures++;
    for (int p = 1; p <= W * H; p++) begin
      advance = 1;
      @(negedge clk);
      advance = 0;
      @(negedge clk);
      check_pixel(p % W, (p / W) % H);
      if (p == W * H - 1) begin
        checks++;
        if (to_real(x) < 0.9999999 || to_real(y) < 0.9999999) begin
          failures++;
          $display("FAIL last pixel %h %h", x, y);
        end
      end
    end
    // Clear from the middle of the image.
    repeat (1000) begin
      advance = 1;
      @(negedge clk);
    end
    advance = 0;
    clear = 1;
    @(negedge clk);
    clear = 0;
    @(negedge clk);
    check_pixel(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
