// quad_af: QuadINR piecewise quadratic activation in a two-stage pipeline.
//
//   phi(x) =  x^2 + 2x   for -2 <  x <= 0
//   phi(x) = -x^2 + 2x   for  0 <  x <  2,   extended with period 4.
//
// Stage 1 (S0 of the paper's AF pipeline) runs the Power Term Multiplier
// (x*x) and the Coefficient Multiplier (2*x) side by side; the sign of the
// square is set from the sign of x, which selects the branch. Stage 2 is the
// Polynomial Adder that sums the two terms. Both multipliers and the adder
// are the FP32 units fp32_mul and fp32_add. The result is exact up to the
// FP32 rounding of x*x and of the final sum: no Taylor approximation is used.
//
// The periodic extension is this design's own addition in front of stage 1
// (the paper defines the period but shows no hardware for it): when
// PERIODIC=1, x is reduced modulo 4 into [-2, 2) before the multipliers. The
// reduction is exact in FP32: for |x| >= 2 the bits of the mantissa that weigh
// less than 4 are kept, folded into [-2, 2), and renormalised. It sits in the
// same cycle as the multipliers, so the latency stays at two cycles.
//
// Interface: in_valid/x/in_tag enter on a rising clock edge; exactly AF_LAT=2
// cycles later out_valid/y/out_tag present the result. There is no back
// pressure: one input may enter every cycle. in_tag is carried along
// unchanged (the layers use it for the write address).
module quad_af
  import quadinr_pkg::*;
#(
  parameter bit          PERIODIC = 1'b1,
  parameter int unsigned TAG_W    = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fp32_t            x,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fp32_t            y,
  output logic [TAG_W-1:0] out_tag
);

  // ---- range reduction: r = x mod 4, in [-2, 2) ----
  fp32_t r;
  always_comb begin
    logic [7:0]  e;
    logic [23:0] u, v;
    logic [47:0] sh;
    logic [4:0]  msb;
    logic [7:0]  er;
    logic        sr;
    e  = x[30:23];
    u  = '0;
    v  = '0;
    sh = '0;
    msb = '0;
    er  = '0;
    sr = x[31];
    r  = x;
    if (PERIODIC && e >= 8'd128 && e != 8'hff) begin
      // |x| >= 2. Units of 2^-22: |x| = M << (E-1), E = e-127 >= 1.
      if (e >= 8'd152) begin
        u = '0;                           // |x| is a multiple of 4
      end else begin
        sh = {24'd0, 1'b1, x[22:0]} << (e - 8'd128);
        u  = sh[23:0];                    // |x| mod 4, in units of 2^-22
      end
      // Fold into [-2, 2): u is in [0, 4) = [0, 2^24).
      if (!x[31]) begin
        if (u < 24'h80_0000) begin v = u;          sr = 1'b0; end
        else                 begin v = 24'd0 - u;  sr = 1'b1; end  // 4 - u
      end else begin
        if (u <= 24'h80_0000) begin v = u;         sr = 1'b1; end
        else                  begin v = 24'd0 - u; sr = 1'b0; end
      end
      if (v == 24'd0) begin
        r = FP_ZERO;
      end else begin
        for (int i = 0; i < 24; i++) if (v[i]) msb = 5'(i);
        // value = v * 2^-22, leading one at bit msb -> exponent msb-22.
        er = 8'(int'(msb) - 22 + 127);
        r  = {sr, er, 23'((v << (23 - msb)))};
      end
    end
  end

  // ---- stage 1: power term and coefficient multipliers ----
  fp32_t sq, twox;
  fp32_mul u_power (.a(r), .b(r),      .y(sq));
  fp32_mul u_coef  (.a(r), .b(FP_TWO), .y(twox));

  // x > 0 selects -x^2; x <= 0 (including -0 and +0) selects +x^2.
  logic pos;
  assign pos = !r[31] && (r[30:0] != 31'd0);

  fp32_t            s1_sq, s1_twox;
  logic             s1_valid;
  logic [TAG_W-1:0] s1_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_sq    <= FP_ZERO;
      s1_twox  <= FP_ZERO;
      s1_tag   <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_sq    <= {pos ^ sq[31], sq[30:0]};
      s1_twox  <= twox;
      s1_tag   <= in_tag;
    end
  end

  // ---- stage 2: polynomial adder ----
  fp32_t sum;
  fp32_add u_poly (.a(s1_sq), .b(s1_twox), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= FP_ZERO;
      out_tag   <= '0;
    end else begin
      out_valid <= s1_valid;
      y         <= sum;
      out_tag   <= s1_tag;
    end
  end

endmodule
