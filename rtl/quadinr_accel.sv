// quadinr_accel: fully pipelined INR accelerator with quadratic activations.
//
// An implicit neural representation stores an image as the weights of a
// small MLP: given a pixel coordinate (x, y), the network returns the pixel's
// colour. This accelerator evaluates such a network for a group of pixels:
//
//   coord_gen -> input_layer (2 -> HID, phi) -> NUM_HIDDEN x linear_layer
//   (HID -> HID, phi) -> output linear_layer (HID -> ODIM, no phi)
//   -> result_ram
//
// phi is the piecewise quadratic activation (quad_af), one unit per layer
// that has an activation: four for the default of three hidden layers. All
// arithmetic is FP32. Every layer produces one output neuron per clock; a
// layer's outputs are written into the next layer's double-buffered
// intermediate RAM, and mem_ctrl advances all layers together in epochs of
// EPOCH cycles, so each layer works on a different pixel (pixel e-s in
// stage s during epoch e). A new pixel finishes every EPOCH cycles and a
// pixel's latency is (NUM_HIDDEN+2)*EPOCH cycles.
//
// Weights and biases are loaded by the host through wb_wr, one word per
// cycle, before start. start with num_pixels > 0 evaluates pixels
// 0..num_pixels-1 of the raster order; each output word is presented on
// pix_valid/pix_addr/pix_data and stored in the result RAM at
// pixel*ODIM + channel, readable through res_rd_addr/res_rd_data (one cycle).
// done pulses when the last pixel is stored.
//
// The layer structure, the sizes (hidden width 256, three linear layers plus
// input and output layer, 768x512 image) and the place of the memory
// controller and memories follow the paper. The epoch schedule, the
// double-buffering, the load port and the RGB output width are this design's
// choices.
module quadinr_accel
  import quadinr_pkg::*;
#(
  parameter int unsigned W          = IMG_W,
  parameter int unsigned H          = IMG_H,
  parameter int unsigned HID        = HIDDEN_DIM,
  parameter int unsigned NH         = NUM_HIDDEN,
  parameter int unsigned ODIM       = OUT_DIM,
  parameter bit          PERIODIC   = 1'b1,
  parameter int unsigned EPOCH      = HID + layer_latency(HID, 1'b1) + 1,
  localparam int unsigned NSTAGE    = NH + 2,
  localparam int unsigned PIX_W     = clog2_min1(W * H + 1),
  localparam int unsigned RDEPTH    = W * H * ODIM,
  localparam int unsigned RA_W      = clog2_min1(RDEPTH),
  localparam int unsigned HW        = clog2_min1(HID),
  localparam int unsigned OW        = clog2_min1(ODIM),
  localparam int unsigned CNT_W     = clog2_min1(EPOCH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  wb_wr_t           wb_wr,
  input  logic             start,
  input  logic [PIX_W-1:0] num_pixels,
  output logic             busy,
  output logic             done,
  output logic             pix_valid,
  output logic [RA_W-1:0]  pix_addr,
  output fp32_t            pix_data,
  input  logic [RA_W-1:0]  res_rd_addr,
  output fp32_t            res_rd_data
);

  // Every layer must finish writing its outputs within one epoch.
  if (EPOCH < HID + layer_latency(HID, 1'b1)) begin : g_chk_hidden
    $error("EPOCH too short for the hidden layer latency");
  end
  if (EPOCH < HID + layer_latency(COORD_DIM, 1'b1)) begin : g_chk_input
    $error("EPOCH too short for the input layer latency");
  end

  // ---- memory controller ----
  logic [CNT_W-1:0] cnt, row_addr;
  logic             wr_bank, rd_bank;
  logic             stage_active [NSTAGE];
  logic [PIX_W-1:0] stage_pix    [NSTAGE];
  logic             row_en       [NSTAGE];
  logic             coord_clear, coord_advance;

  mem_ctrl #(
    .NSTAGE  (NSTAGE),
    .ROWS_HID(HID),
    .ROWS_OUT(ODIM),
    .EPOCH   (EPOCH),
    .PIX_W   (PIX_W)
  ) u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (start),
    .num_pixels   (num_pixels),
    .busy         (busy),
    .done         (done),
    .cnt          (cnt),
    .wr_bank      (wr_bank),
    .rd_bank      (rd_bank),
    .stage_active (stage_active),
    .stage_pix    (stage_pix),
    .row_en       (row_en),
    .row_addr     (row_addr),
    .coord_clear  (coord_clear),
    .coord_advance(coord_advance)
  );

  // ---- coordinate generator ----
  fp32_t                      cx, cy;
  logic [clog2_min1(W)-1:0]   ccol;
  logic [clog2_min1(H)-1:0]   crow;

  coord_gen #(.W(W), .H(H)) u_coord (
    .clk    (clk),
    .rst_n  (rst_n),
    .clear  (coord_clear),
    .advance(coord_advance),
    .col    (ccol),
    .row    (crow),
    .x      (cx),
    .y      (cy)
  );

  // ---- input layer ----
  logic          h_valid [NH+1];
  logic [HW-1:0] h_addr  [NH+1];
  fp32_t         h_data  [NH+1];

  input_layer #(.ROWS(HID), .PERIODIC(PERIODIC)) u_in (
    .clk      (clk),
    .rst_n    (rst_n),
    .wb_en    (wb_wr.en && wb_wr.layer == 3'd0),
    .wb_row   (wb_wr.row[HW-1:0]),
    .wb_col   (wb_wr.col[clog2_min1(COORD_DIM + 1)-1:0]),
    .wb_data  (wb_wr.data),
    .x        (cx),
    .y        (cy),
    .row_en   (row_en[0]),
    .row      (row_addr[HW-1:0]),
    .out_valid(h_valid[0]),
    .out_addr (h_addr[0]),
    .out_data (h_data[0])
  );

  // ---- hidden linear layers ----
  for (genvar k = 1; k <= NH; k++) begin : g_hidden
    linear_layer #(
      .IN_DIM(HID), .OUT_ROWS(HID), .HAS_AF(1'b1), .PERIODIC(PERIODIC)
    ) u_lin (
      .clk      (clk),
      .rst_n    (rst_n),
      .wb_en    (wb_wr.en && wb_wr.layer == 3'(k)),
      .wb_row   (wb_wr.row[HW-1:0]),
      .wb_col   (wb_wr.col[clog2_min1(HID + 1)-1:0]),
      .wb_data  (wb_wr.data),
      .in_we    (h_valid[k-1]),
      .in_bank  (wr_bank),
      .in_addr  (h_addr[k-1]),
      .in_data  (h_data[k-1]),
      .rd_bank  (rd_bank),
      .row_en   (row_en[k]),
      .row      (row_addr[HW-1:0]),
      .out_valid(h_valid[k]),
      .out_addr (h_addr[k]),
      .out_data (h_data[k])
    );
  end

  // ---- output layer (no activation) ----
  logic          o_valid;
  logic [OW-1:0] o_addr;
  fp32_t         o_data;

  linear_layer #(
    .IN_DIM(HID), .OUT_ROWS(ODIM), .HAS_AF(1'b0), .PERIODIC(PERIODIC)
  ) u_out (
    .clk      (clk),
    .rst_n    (rst_n),
    .wb_en    (wb_wr.en && wb_wr.layer == 3'(NH + 1)),
    .wb_row   (wb_wr.row[OW-1:0]),
    .wb_col   (wb_wr.col[clog2_min1(HID + 1)-1:0]),
    .wb_data  (wb_wr.data),
    .in_we    (h_valid[NH]),
    .in_bank  (wr_bank),
    .in_addr  (h_addr[NH]),
    .in_data  (h_data[NH]),
    .rd_bank  (rd_bank),
    .row_en   (row_en[NSTAGE-1]),
    .row      (row_addr[OW-1:0]),
    .out_valid(o_valid),
    .out_addr (o_addr),
    .out_data (o_data)
  );

  // ---- result RAM ----
  assign pix_valid = o_valid;
  assign pix_addr  = RA_W'(stage_pix[NSTAGE-1] * ODIM + o_addr);
  assign pix_data  = o_data;

  result_ram #(.DEPTH(RDEPTH)) u_res (
    .clk    (clk),
    .wr_en  (pix_valid),
    .wr_addr(pix_addr),
    .wr_data(pix_data),
    .rd_addr(res_rd_addr),
    .rd_data(res_rd_data)
  );

  // The output layer must finish inside the epoch in which it started, so
  // that stage_pix still names its pixel when its words arrive.
  a_out_in_epoch: assert property (@(posedge clk) disable iff (!rst_n)
    o_valid |-> stage_active[NSTAGE-1])
    else $error("output word outside the output layer's epoch");

endmodule
