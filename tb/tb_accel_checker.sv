// tb_accel_checker: stimulus and scoreboard for the whole accelerator.
//
// Used by the end-to-end testbenches, which instantiate the accelerator and
// this checker side by side with the same sizes. The checker
//   1. loads random weights and biases into every layer through wb_wr
//      (input layer uniform in [-4, 4] so that pre-activations leave (-2, 2),
//      other layers uniform in +-1.9/sqrt(HID));
//   2. starts a group of NPIX1 pixels, then a second group of NPIX2;
//   3. computes every pixel independently with FP32 reference arithmetic:
//      coordinates, input layer, NH hidden layers, output layer, adding in
//      the hardware's tree order, and compares every streamed output word
//      (pix_valid/pix_addr/pix_data) bit-exactly;
//   4. checks that done is seen (npix + NH + 1) * EPOCH + 1 cycles after
//      start is applied (one cycle samples start), and reads every stored word back from the result RAM;
//   5. counts the mechanisms of the design and fails if one never happened:
//      overlapped stages, bank flips, periodic activation (pre-activation
//      outside [-2, 2)), a coordinate moving to the next image row, a second
//      group after done.
module tb_accel_checker
  import quadinr_pkg::*;
  import tb_fp_pkg::*;
#(
  parameter int W     = 8,
  parameter int H     = 4,
  parameter int HID   = 16,
  parameter int NH    = 3,
  parameter int ODIM  = 3,
  parameter int EPOCH = 26,
  parameter int NPIX1 = 32,
  parameter int NPIX2 = 5,
  parameter int PIX_W = 6,
  parameter int RA_W  = 7,
  parameter longint WATCHDOG = 2000000
) (
  input  logic             clk,
  output logic             rst_n,
  output wb_wr_t           wb_wr,
  output logic             start,
  output logic [PIX_W-1:0] num_pixels,
  input  logic             busy,
  input  logic             done,
  input  logic             pix_valid,
  input  logic [RA_W-1:0]  pix_addr,
  input  fp32_t            pix_data,
  output logic [RA_W-1:0]  res_rd_addr,
  input  fp32_t            res_rd_data,
  input  logic             wr_bank,
  input  int               n_active
);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Weights, biases at index fan-in.
  logic [31:0] w_in  [HID][3];
  logic [31:0] w_hid [NH][HID][HID+1];
  logic [31:0] w_out [ODIM][HID+1];

  // Expected output words by result address.
  logic [31:0] expect_w [int];
  int          n_wrap = 0, n_overlap = 0, n_flip = 0, n_rowstep = 0, n_groups = 0;
  int          n_words = 0;

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h expected %h", what, got, exp);
    end
  endtask

  function automatic logic [31:0] tree_dot(input logic [31:0] w [HID+1], input logic [31:0] v [HID]);
    logic [31:0] t [];
    int p;
    p = 1;
    while (p < HID) p *= 2;
    t = new[p];
    for (int i = 0; i < p; i++) t[i] = (i < HID) ? fmul(w[i], v[i]) : 32'd0;
    while (p > 1) begin
      for (int i = 0; i < p / 2; i++) t[i] = fadd(t[2*i], t[2*i+1]);
      p /= 2;
    end
    return fadd(t[0], w[HID]);
  endfunction

  function automatic void note_wrap(input logic [31:0] z);
    if (to_real(z) >= 2.0 || to_real(z) < -2.0) n_wrap++;
  endfunction

  // Reference for one pixel; fills expect_w.
  task automatic ref_pixel(input int p);
    logic [31:0] x, y, z;
    logic [31:0] h [HID];
    logic [31:0] g [HID];
    int c, r;
    c = p % W;
    r = (p / W) % H;
    x = to_f32(real'(2 * c - (W - 1)) * to_real(to_f32(1.0 / real'(W - 1))));
    y = to_f32(real'(2 * r - (H - 1)) * to_real(to_f32(1.0 / real'(H - 1))));
    for (int j = 0; j < HID; j++) begin
      z = fadd(fadd(fmul(w_in[j][0], x), fmul(w_in[j][1], y)), w_in[j][2]);
      note_wrap(z);
      h[j] = phi(z);
    end
    for (int l = 0; l < NH; l++) begin
      for (int j = 0; j < HID; j++) begin
        z = tree_dot(w_hid[l][j], h);
        note_wrap(z);
        g[j] = phi(z);
      end
      h = g;
    end
    for (int k = 0; k < ODIM; k++) expect_w[p * ODIM + k] = tree_dot(w_out[k], h);
  endtask

  task automatic load(input int layer, input int row, input int col, input logic [31:0] d);
    wb_wr = '{en: 1'b1, layer: 3'(layer), row: 16'(row), col: 16'(col), data: d};
    @(negedge clk);
  endtask

  // Stream scoreboard.
  always @(negedge clk) begin
    if (pix_valid) begin
      n_words++;
      checks++;
      if (!expect_w.exists(int'(pix_addr))) begin
        failures++;
        $display("FAIL unexpected output address %0d", pix_addr);
      end else if (pix_data !== expect_w[int'(pix_addr)]) begin
        failures++;
        if (failures < 10) $display("FAIL pixel word %0d: %h expected %h", pix_addr, pix_data,
                                    expect_w[int'(pix_addr)]);
      end
    end
    if (n_active >= 2) n_overlap++;
  end

  logic wr_bank_q = 1'b0;
  always @(negedge clk) begin
    if (busy && wr_bank != wr_bank_q) n_flip++;
    wr_bank_q <= wr_bank;
  end

  task automatic run_group(input int npix);
    longint t0;
    int words0;
    words0 = n_words;
    expect_w.delete();
    for (int p = 0; p < npix; p++) begin
      ref_pixel(p);
      if (p > 0 && p % W == 0) n_rowstep++;
    end
    num_pixels = PIX_W'(npix);
    start = 1'b1;
    t0 = cycle;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    checks++;
    // One edge samples start, (npix + NH + 1) epochs run, done is registered
    // on the last edge of the last epoch.
    if (cycle - t0 != longint'((npix + NH + 1) * EPOCH + 1)) begin
      failures++;
      $display("FAIL group of %0d took %0d cycles, expected %0d", npix, cycle - t0,
               (npix + NH + 1) * EPOCH + 1);
    end
    checks++;
    if (n_words - words0 != npix * ODIM) begin
      failures++;
      $display("FAIL %0d words streamed, expected %0d", n_words - words0, npix * ODIM);
    end
    // Read the result RAM back.
    foreach (expect_w[a]) begin
      res_rd_addr = RA_W'(a);
      @(negedge clk);
      expect_eq(res_rd_data, expect_w[a], $sformatf("result RAM %0d", a));
    end
    n_groups++;
  endtask

  task automatic mech(input string name, input int n);
    $display("mechanism %-28s %0d", name, n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", name);
    end
  endtask

  initial begin
    real s;
    rst_n       = 1'b0;
    start       = 1'b0;
    num_pixels  = '0;
    res_rd_addr = '0;
    wb_wr       = '0;
    s = 1.9 / $sqrt(real'(HID));
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int j = 0; j < HID; j++)
      for (int c = 0; c < 3; c++) begin
        w_in[j][c] = rand_uni(4.0);
        load(0, j, c, w_in[j][c]);
      end
    for (int l = 0; l < NH; l++)
      for (int j = 0; j < HID; j++)
        for (int c = 0; c <= HID; c++) begin
          w_hid[l][j][c] = rand_uni(s);
          load(l + 1, j, c, w_hid[l][j][c]);
        end
    for (int k = 0; k < ODIM; k++)
      for (int c = 0; c <= HID; c++) begin
        w_out[k][c] = rand_uni(s);
        load(NH + 1, k, c, w_out[k][c]);
      end
    wb_wr = '0;
    @(negedge clk);
    run_group(NPIX1);
    repeat (5) @(negedge clk);
    run_group(NPIX2);
    mech("stages overlapped (cycles)", n_overlap);
    mech("buffer bank flips", n_flip);
    mech("periodic activation inputs", n_wrap);
    // A row step needs a group longer than one image row.
    if (NPIX1 > W) mech("coordinate row steps", n_rowstep);
    mech("second group after done", n_groups - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
