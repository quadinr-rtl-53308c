// result_ram: stores the generated pixel values.
//
// The output layer writes each pixel channel as it is produced, at address
// pixel*CH + channel; the host reads words back through a port with one
// cycle of latency. Depth is one full image, W*H pixels of CH channels.
//
// The paper names this memory (Result BRAM) and says the output layer stores
// its pixel values there directly; the address layout and the read port are
// this design's choices.
module result_ram
  import quadinr_pkg::*;
#(
  parameter int unsigned DEPTH = IMG_W * IMG_H * OUT_DIM,
  localparam int unsigned AW   = clog2_min1(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  fp32_t         wr_data,
  input  logic [AW-1:0] rd_addr,
  output fp32_t         rd_data
);

  fp32_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_addr) < int'(DEPTH)) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    rd_data <= mem[rd_addr];
  end

endmodule
