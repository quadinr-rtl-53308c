// tb_input_layer: self-checking test of the coordinate input layer.
//
// Loads random weights (uniform in [-4, 4], so that many pre-activations lie
// outside (-2, 2) and use the periodic activation) and biases into the
// default 256-neuron layer, then for several coordinates requests all 256
// rows back to back and checks each feature
//   phi((w0*x + w1*y) + b)
// against the reference, its address, and the 6-cycle latency.
module tb_input_layer;
  import tb_fp_pkg::*;

  localparam int R = 256;

  logic        clk = 0, rst_n = 0;
  logic        wb_en = 0, row_en = 0, out_valid;
  logic [7:0]  wb_row = 0, row = 0, out_addr;
  logic [1:0]  wb_col = 0;
  logic [31:0] wb_data = 0, x = 0, y = 0, out_data;
  logic [31:0] wm [R][3];
  int checks = 0, failures = 0, cycle = 0, n_out = 0, n_wrap = 0;

  input_layer dut (
    .clk(clk), .rst_n(rst_n), .wb_en(wb_en), .wb_row(wb_row), .wb_col(wb_col),
    .wb_data(wb_data), .x(x), .y(y), .row_en(row_en), .row(row),
    .out_valid(out_valid), .out_addr(out_addr), .out_data(out_data)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] exp_q [$];
  int          row_q [$], cyc_q [$];

  always @(negedge clk) begin
    if (out_valid) begin
      logic [31:0] e;
      int r, c;
      e = exp_q.pop_front();
      r = row_q.pop_front();
      c = cyc_q.pop_front();
      checks += 3;
      if (out_data !== e) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d: %h expected %h", r, out_data, e);
      end
      if (int'(out_addr) != r) failures++;
      if (cycle - c != 6) begin
        failures++;
        if (failures < 10) $display("FAIL latency %0d", cycle - c);
      end
      n_out++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < 3; c++) begin
        wm[r][c] = rand_uni(4.0);
        wb_en = 1; wb_row = 8'(r); wb_col = 2'(c); wb_data = wm[r][c];
        @(negedge clk);
      end
    end
    wb_en = 0;
    for (int k = 0; k < 20; k++) begin
      x = rand_uni(1.0);
      y = rand_uni(1.0);
      if (k == 0) begin x = 32'hbf80_0000; y = 32'h3f80_0000; end
      for (int r = 0; r < R; r++) begin
        logic [31:0] z;
        z = fadd(fadd(fmul(wm[r][0], x), fmul(wm[r][1], y)), wm[r][2]);
        if (to_real(z) >= 2.0 || to_real(z) < -2.0) n_wrap++;
        exp_q.push_back(phi(z));
        row_q.push_back(r);
        cyc_q.push_back(cycle);
        row_en = 1; row = 8'(r);
        @(negedge clk);
      end
      row_en = 0;
      repeat (2) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    checks += 2;
    if (n_out != 20 * R) begin
      failures++;
      $display("FAIL output count %0d", n_out);
    end
    if (n_wrap == 0) begin
      failures++;
      $display("FAIL no pre-activation outside (-2,2)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
