// fp32_add: combinational IEEE-754 single-precision adder.
//
// This is the paper's Polynomial Adder, and the node of every adder tree in
// the accelerator. The structure follows the paper's block diagram: sign,
// exponent and mantissa extraction; an exponent subtractor that gives the
// larger exponent and the difference EA-EB; a right shifter that aligns the
// smaller mantissa; a mantissa adder/subtractor driven by the two signs; and a
// normalizer (leading-zero count and shifter) that produces the result.
//
// Choices of this design (the paper states only "FP32"):
//   * round-to-nearest-even, using guard, round and sticky bits kept through
//     the alignment shift;
//   * the normalizer counts leading zeros of the sum after the add instead of
//     anticipating them in parallel (same result, longer path);
//   * subnormal inputs read as zero, results below the normal range flush to
//     zero, an exact cancellation gives +0, overflow gives infinity,
//     inf-inf and NaN inputs give a quiet NaN.
//
// Interface: a, b in, y out, purely combinational.
module fp32_add
  import quadinr_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  // Extraction, with subnormals read as zero.
  logic       sa, sb;
  logic [7:0] ea, eb;
  logic [23:0] ma, mb;
  logic       ia, ib, na, nb;

  assign sa = a[31];
  assign sb = b[31];
  assign ea = a[30:23];
  assign eb = b[30:23];
  assign ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
  assign mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
  assign ia = (ea == 8'hff) && (a[22:0] == 23'd0);
  assign ib = (eb == 8'hff) && (b[22:0] == 23'd0);
  assign na = (ea == 8'hff) && (a[22:0] != 23'd0);
  assign nb = (eb == 8'hff) && (b[22:0] != 23'd0);

  // Exponent subtractor: order the operands so that |x| >= |z|.
  logic        swap;
  logic        sx, sz;
  logic [7:0]  ex, ez, ediff;
  logic [23:0] mx, mz;

  assign swap  = {ea, ma} < {eb, mb};
  assign sx    = swap ? sb : sa;
  assign sz    = swap ? sa : sb;
  assign ex    = swap ? eb : ea;
  assign ez    = swap ? ea : eb;
  assign mx    = swap ? mb : ma;
  assign mz    = swap ? ma : mb;
  assign ediff = ex - ez;

  // Right shifter: mantissa with 3 extra bits (guard, round, sticky).
  logic [26:0] mz_al;
  always_comb begin
    logic [49:0] wide;
    wide = {mz, 26'd0} >> ediff;
    mz_al = {wide[49:24], |wide[23:0]};
  end

  // Mantissa adder/subtractor.
  logic        sub;
  logic [27:0] msum;
  assign sub  = sx ^ sz;
  assign msum = sub ? ({1'b0, mx, 3'b000} - {1'b0, mz_al})
                    : ({1'b0, mx, 3'b000} + {1'b0, mz_al});

  // Normalizer: leading-zero count and left shift, or a one-bit right shift
  // on a carry out, then round to nearest even.
  logic [4:0]         lz;
  logic [27:0]        mnorm;
  logic signed [9:0]  enorm, efin;
  logic [24:0]        mrnd;
  logic               rnd;

  always_comb begin
    lz = 5'd0;
    for (int i = 26; i >= 0; i--) begin
      if (msum[i]) begin
        lz = 5'(26 - i);
        break;
      end
    end
  end

  always_comb begin
    if (msum[27]) begin
      mnorm = {1'b0, msum[27:2], msum[1] | msum[0]};
      enorm = $signed({2'b00, ex}) + 10'sd1;
    end else begin
      mnorm = msum << lz;
      enorm = $signed({2'b00, ex}) - $signed({5'd0, lz});
    end
    // mnorm[26:3] is the 24-bit mantissa, [2] guard, [1:0] round/sticky.
    rnd  = mnorm[2] & ((|mnorm[1:0]) | mnorm[3]);
    mrnd = {1'b0, mnorm[26:3]} + {24'd0, rnd};
    efin = mrnd[24] ? enorm + 10'sd1 : enorm;
  end

  always_comb begin
    if (na || nb || (ia && ib && (sa != sb))) begin
      y = FP_QNAN;
    end else if (ia) begin
      y = a;
    end else if (ib) begin
      y = b;
    end else if (msum == 28'd0) begin
      // Exact zero: -0 only when both operands are -0.
      y = {sa & sb, 31'd0};
    end else if (enorm <= 10'sd0) begin
      y = {sx, 31'd0};
    end else if (efin >= 10'sd255) begin
      y = {sx, 8'hff, 23'd0};
    end else begin
      y = {sx, efin[7:0], mrnd[22:0]};
    end
  end

endmodule
