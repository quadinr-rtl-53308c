// fp_adder_tree: pipelined FP32 addition tree.
//
// Sums N FP32 values by pairwise addition, one register level per tree
// level, so a new vector may enter every cycle and its sum leaves
// LAT = ceil(log2 N) cycles later. N is padded up to a power of two with
// +0.0 inputs. Level k adds element 2i and 2i+1 of level k-1, so the
// rounding order is fixed: ((in0+in1)+(in2+in3))+... .
//
// In the accelerator this is the 256-input addition tree of each linear layer
// and the small adder tree of the input layer. The paper gives the tree's
// size and place; one register per level and the pairing order are this
// design's choices.
//
// Interface: in_valid/in/in_tag sampled on the clock edge; out_valid/sum/
// out_tag follow LAT cycles later. No back pressure.
module fp_adder_tree
  import quadinr_pkg::*;
#(
  parameter int unsigned N     = 256,
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fp32_t            in [N],
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fp32_t            sum,
  output logic [TAG_W-1:0] out_tag
);

  localparam int unsigned LAT = (N <= 1) ? 1 : $clog2(N);
  localparam int unsigned P   = 1 << LAT;

  // lvl[0] is the padded input, lvl[k] the registered output of level k.
  fp32_t            lvl [LAT+1][P];
  logic             vld [LAT+1];
  logic [TAG_W-1:0] tag [LAT+1];

  always_comb begin
    for (int i = 0; i < int'(P); i++) lvl[0][i] = (i < int'(N)) ? in[i] : FP_ZERO;
  end
  assign vld[0] = in_valid;
  assign tag[0] = in_tag;

  for (genvar k = 1; k <= LAT; k++) begin : g_level
    localparam int unsigned NODES = P >> k;
    for (genvar i = 0; i < NODES; i++) begin : g_node
      fp32_t s;
      fp32_add u_add (.a(lvl[k-1][2*i]), .b(lvl[k-1][2*i+1]), .y(s));
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) lvl[k][i] <= FP_ZERO;
        else        lvl[k][i] <= s;
      end
    end
    // Upper half of each level is unused.
    for (genvar i = NODES; i < P; i++) begin : g_pad
      assign lvl[k][i] = FP_ZERO;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[k] <= 1'b0;
        tag[k] <= '0;
      end else begin
        vld[k] <= vld[k-1];
        tag[k] <= tag[k-1];
      end
    end
  end

  assign out_valid = vld[LAT];
  assign sum       = lvl[LAT][0];
  assign out_tag   = tag[LAT];

endmodule
