// intermediate_ram: double-buffered activation store between two layers.
//
// Holds the DEPTH activations a layer consumes. There are two banks: while
// the layer reads the complete vector of one bank, the layer before it
// writes the next pixel's activations, one word per cycle, into the other.
// The memory controller flips the banks at every schedule epoch. All DEPTH
// words of the read bank are visible at once, because the MAC array
// multiplies the whole vector with one weight row per cycle; on an FPGA this
// is a memory partitioned into registers or LUT RAM.
//
// The paper names this memory (Intermediate BRAM, holding partial results)
// and its place; the two banks and the parallel read are this design's
// choices.
//
// Interface: wr_en/wr_bank/wr_addr/wr_data written on the clock edge;
// rd_vec shows bank rd_bank combinationally.
module intermediate_ram
  import quadinr_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = clog2_min1(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic          wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  fp32_t         wr_data,
  input  logic          rd_bank,
  output fp32_t         rd_vec [DEPTH]
);

  fp32_t mem [2][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_addr) < int'(DEPTH)) mem[wr_bank][wr_addr] <= wr_data;
  end

  assign rd_vec = mem[rd_bank];

endmodule
