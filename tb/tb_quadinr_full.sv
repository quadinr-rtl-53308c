// tb_quadinr_full: the accelerator at its default size, end to end.
//
// 768 x 512 image, hidden width 256, three hidden layers, RGB output, all
// parameters at their defaults. Loads all 198,915 weight and bias words,
// generates a group of the first 4 pixels and then a group of 2, and
// compares every output word bit-exactly with the reference network (see
// tb_accel_checker), including the epoch timing of 270 cycles per pixel.
module tb_quadinr_full;
  import quadinr_pkg::*;

  localparam int W = IMG_W, H = IMG_H, HID = HIDDEN_DIM, NH = NUM_HIDDEN, ODIM = OUT_DIM;
  localparam int EPOCH = HID + int'(layer_latency(HID, 1'b1)) + 1;
  localparam int PIX_W = clog2_min1(W * H + 1);
  localparam int RA_W  = clog2_min1(W * H * ODIM);

  logic             clk = 1'b0;
  logic             rst_n, start, busy, done, pix_valid;
  wb_wr_t           wb_wr;
  logic [PIX_W-1:0] num_pixels;
  logic [RA_W-1:0]  pix_addr, res_rd_addr;
  fp32_t            pix_data, res_rd_data;
  int               n_active;

  always #5 clk = ~clk;

  quadinr_accel dut (
    .clk(clk), .rst_n(rst_n), .wb_wr(wb_wr), .start(start), .num_pixels(num_pixels),
    .busy(busy), .done(done), .pix_valid(pix_valid), .pix_addr(pix_addr),
    .pix_data(pix_data), .res_rd_addr(res_rd_addr), .res_rd_data(res_rd_data)
  );

  always_comb begin
    n_active = 0;
    for (int s = 0; s < NH + 2; s++) n_active += int'(dut.stage_active[s]);
  end

  tb_accel_checker #(
    .W(W), .H(H), .HID(HID), .NH(NH), .ODIM(ODIM), .EPOCH(EPOCH),
    .NPIX1(4), .NPIX2(2), .PIX_W(PIX_W), .RA_W(RA_W), .WATCHDOG(400000)
  ) chk (
    .clk(clk), .rst_n(rst_n), .wb_wr(wb_wr), .start(start), .num_pixels(num_pixels),
    .busy(busy), .done(done), .pix_valid(pix_valid), .pix_addr(pix_addr),
    .pix_data(pix_data), .res_rd_addr(res_rd_addr), .res_rd_data(res_rd_data),
    .wr_bank(dut.wr_bank), .n_active(n_active)
  );
endmodule
