// mac_array: N parallel FP32 multipliers with a registered output.
//
// Multiplies the layer's input activation vector element-wise with one row
// of weights per cycle; the products go on to the adder tree, which performs
// the accumulation, so multiplier plus tree form the multiply-accumulate of
// one output neuron per cycle. The paper gives the array size (256 in a
// linear layer, two multipliers in the input layer); the single output
// register is this design's choice.
//
// Interface: in_valid/act/w/in_tag sampled on the clock edge, out_valid/prod/
// out_tag one cycle later. No back pressure.
module mac_array
  import quadinr_pkg::*;
#(
  parameter int unsigned N     = 256,
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fp32_t            act  [N],
  input  fp32_t            w    [N],
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fp32_t            prod [N],
  output logic [TAG_W-1:0] out_tag
);

  for (genvar i = 0; i < N; i++) begin : g_mul
    fp32_t p;
    fp32_mul u_mul (.a(act[i]), .b(w[i]), .y(p));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) prod[i] <= FP_ZERO;
      else        prod[i] <= p;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
    end
  end

endmodule
