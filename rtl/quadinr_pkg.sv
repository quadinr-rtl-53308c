// quadinr_pkg: types and constants shared by the QuadINR accelerator.
//
// All data in the accelerator is IEEE-754 single precision (FP32), carried as
// raw 32-bit words. The network shape follows the accelerator described for
// QuadINR: a 2-input coordinate layer, hidden layers of 256 neurons, and an
// output layer; image size 768x512. Widths of the host load bus, the RGB
// output and the rounding/flush behaviour are this design's own choices.
package quadinr_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3f80_0000;
  localparam fp32_t FP_TWO  = 32'h4000_0000;
  localparam fp32_t FP_INF  = 32'h7f80_0000;
  localparam fp32_t FP_QNAN = 32'h7fc0_0000;

  // Network shape (defaults of the top level).
  localparam int unsigned HIDDEN_DIM  = 256; // neurons per hidden layer
  localparam int unsigned COORD_DIM   = 2;   // (x, y) input coordinates
  localparam int unsigned OUT_DIM     = 3;   // R, G, B
  localparam int unsigned NUM_HIDDEN  = 3;   // linear layers with an activation
  localparam int unsigned IMG_W       = 768;
  localparam int unsigned IMG_H       = 512;

  // Pipeline latencies in clock cycles.
  localparam int unsigned AF_LAT      = 2;   // quadratic activation

  // Host write into any layer's weight & bias memory. col == fan-in selects
  // the bias word of that row.
  typedef struct packed {
    logic        en;
    logic [2:0]  layer;  // 0 input layer, 1..NUM_HIDDEN hidden, NUM_HIDDEN+1 output
    logic [15:0] row;    // output neuron
    logic [15:0] col;    // input index, or fan-in for the bias
    fp32_t       data;
  } wb_wr_t;

  // Cycles from a row read request to the layer's output word: weight RAM
  // read, multiplier register, adder tree levels, bias adder, activation.
  function automatic int unsigned layer_latency(input int unsigned fan_in,
                                                input bit has_af);
    return 3 + ((fan_in <= 1) ? 1 : $clog2(fan_in)) + (has_af ? AF_LAT : 0);
  endfunction

  function automatic int unsigned clog2_min1(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

  // Elaboration-time conversion of a real constant to FP32 bits, round to
  // nearest even, used for constant coefficients such as 1/(W-1).
  function automatic fp32_t real_to_fp32(input real r);
    logic [63:0] d;
    logic [10:0] e11;
    logic [51:0] m52;
    int          e;
    logic [23:0] m;
    logic        g, st;
    d   = $realtobits(r);
    e11 = d[62:52];
    m52 = d[51:0];
    if (e11 == 11'd0) return {d[63], 31'd0};
    e   = int'(e11) - 1023 + 127;
    m   = {1'b1, m52[51:29]};
    g   = m52[28];
    st  = |m52[27:0];
    if (g && (st || m[0])) begin
      m = m + 24'd1;
      if (m == 24'd0) begin
        m = 24'h80_0000;
        e = e + 1;
      end
    end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

endpackage
