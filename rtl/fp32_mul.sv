// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// This is the unit the activation pipeline uses both as the Power Term
// Multiplier (x*x) and as the Coefficient Multiplier (c*x), and the one the
// MAC arrays use for weight*activation. Its structure follows the paper's
// block diagram: the operands are split into sign, exponent and mantissa;
// the signs are XORed, the exponents added, the 24-bit mantissas multiplied,
// and a normalizer shifts the 48-bit product and adjusts the exponent.
//
// Choices of this design (the paper states only "FP32"):
//   * rounding is round-to-nearest-even;
//   * subnormal inputs are read as zero and results below the normal range
//     are flushed to a signed zero (decided on the exponent before rounding);
//   * overflow gives a signed infinity, 0*inf and NaN inputs give a quiet NaN.
//
// Interface: a, b in, y out, purely combinational (no clock). The callers
// place pipeline registers around it.
module fp32_mul
  import quadinr_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  // Sign, exponent and mantissa extraction.
  logic       sa, sb, sy;
  logic [7:0] ea, eb;
  logic       za, zb, ia, ib, na, nb;

  assign sa = a[31];
  assign sb = b[31];
  assign ea = a[30:23];
  assign eb = b[30:23];
  assign za = (ea == 8'd0);
  assign zb = (eb == 8'd0);
  assign ia = (ea == 8'hff) && (a[22:0] == 23'd0);
  assign ib = (eb == 8'hff) && (b[22:0] == 23'd0);
  assign na = (ea == 8'hff) && (a[22:0] != 23'd0);
  assign nb = (eb == 8'hff) && (b[22:0] != 23'd0);

  // XOR of the signs.
  assign sy = sa ^ sb;

  // Mantissa multiplier and exponent adder.
  logic [47:0] prod;
  logic signed [10:0] esum;
  assign prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
  assign esum = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 11'sd127;

  // Normalizer: the product of two values in [1,2) lies in [1,4), so at most
  // a one-bit shift. Then round to nearest even on the 24 kept bits.
  logic [23:0]        mkeep;
  logic               gbit, sticky, rnd;
  logic signed [10:0] enorm, efin;
  logic [24:0]        mrnd;

  always_comb begin
    if (prod[47]) begin
      mkeep  = prod[47:24];
      gbit   = prod[23];
      sticky = |prod[22:0];
      enorm  = esum + 11'sd1;
    end else begin
      mkeep  = prod[46:23];
      gbit   = prod[22];
      sticky = |prod[21:0];
      enorm  = esum;
    end
    rnd  = gbit & (sticky | mkeep[0]);
    mrnd = {1'b0, mkeep} + {24'd0, rnd};
    efin = mrnd[24] ? enorm + 11'sd1 : enorm;
  end

  always_comb begin
    if (na || nb || (ia && zb) || (ib && za)) begin
      y = FP_QNAN;
    end else if (ia || ib) begin
      y = {sy, 8'hff, 23'd0};
    end else if (za || zb || enorm <= 11'sd0) begin
      y = {sy, 31'd0};
    end else if (efin >= 11'sd255) begin
      y = {sy, 8'hff, 23'd0};
    end else begin
      // On a rounding carry mrnd is 1_0000..., whose fraction bits are zero.
      y = {sy, efin[7:0], mrnd[22:0]};
    end
  end

endmodule
