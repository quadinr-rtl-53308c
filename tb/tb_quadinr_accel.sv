// tb_quadinr_accel: end-to-end test of the accelerator at reduced size.
//
// An 8 x 4 image, hidden width 16, three hidden layers, RGB output: every
// one of the 32 pixels is generated in one group and compared bit-exactly
// with the reference network, followed by a second group of 5 pixels. See
// tb_accel_checker for what is checked and which mechanisms are counted.
module tb_quadinr_accel;
  import quadinr_pkg::*;

  localparam int W = 8, H = 4, HID = 16, NH = 3, ODIM = 3;
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

  quadinr_accel #(.W(W), .H(H), .HID(HID), .NH(NH), .ODIM(ODIM)) dut (
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
    .NPIX1(W * H), .NPIX2(5), .PIX_W(PIX_W), .RA_W(RA_W), .WATCHDOG(200000)
  ) chk (
    .clk(clk), .rst_n(rst_n), .wb_wr(wb_wr), .start(start), .num_pixels(num_pixels),
    .busy(busy), .done(done), .pix_valid(pix_valid), .pix_addr(pix_addr),
    .pix_data(pix_data), .res_rd_addr(res_rd_addr), .res_rd_data(res_rd_data),
    .wr_bank(dut.wr_bank), .n_active(n_active)
  );
endmodule
