// tb_linear_layer: self-checking test of the fully connected layer.
//
// Two instances: a hidden layer at the default size (256 -> 256, with the
// quadratic activation) and an output layer (256 -> 3, no activation). Both
// get random weights and biases. Random input vectors are written into one
// bank of the intermediate RAM while the rows of the previous vector are
// requested from the other bank, as the memory controller schedules it.
// Every output is compared with a reference that multiplies, adds in the
// same tree order, adds the bias and applies phi; the address and the
// latency (13 cycles hidden, 11 cycles output) are checked too.
module tb_linear_layer;
  import tb_fp_pkg::*;

  localparam int N = 256, RO = 3;

  logic        clk = 0, rst_n = 0;
  logic        wb_en_h = 0, wb_en_o = 0, in_we = 0, in_bank = 0, rd_bank = 0;
  logic        row_en_h = 0, row_en_o = 0;
  logic [7:0]  wb_row = 0, in_addr = 0, row = 0;
  logic [8:0]  wb_col = 0;
  logic [31:0] wb_data = 0, in_data = 0;
  logic        ov_h, ov_o;
  logic [7:0]  oa_h;
  logic [1:0]  oa_o;
  logic [31:0] od_h, od_o;
  logic [31:0] wh [N][N+1];
  logic [31:0] wo [RO][N+1];
  logic [31:0] vec [2][N];
  int checks = 0, failures = 0, cycle = 0, n_h = 0, n_o = 0;

  linear_layer dut_h (
    .clk(clk), .rst_n(rst_n), .wb_en(wb_en_h), .wb_row(wb_row), .wb_col(wb_col),
    .wb_data(wb_data), .in_we(in_we), .in_bank(in_bank), .in_addr(in_addr),
    .in_data(in_data), .rd_bank(rd_bank), .row_en(row_en_h), .row(row),
    .out_valid(ov_h), .out_addr(oa_h), .out_data(od_h)
  );
  linear_layer #(.OUT_ROWS(RO), .HAS_AF(1'b0)) dut_o (
    .clk(clk), .rst_n(rst_n), .wb_en(wb_en_o), .wb_row(wb_row[1:0]), .wb_col(wb_col),
    .wb_data(wb_data), .in_we(in_we), .in_bank(in_bank), .in_addr(in_addr),
    .in_data(in_data), .rd_bank(rd_bank), .row_en(row_en_o), .row(row[1:0]),
    .out_valid(ov_o), .out_addr(oa_o), .out_data(od_o)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] dot(input logic [31:0] w [N+1], input logic [31:0] v [N]);
    logic [31:0] t [N];
    int p;
    for (int i = 0; i < N; i++) t[i] = fmul(w[i], v[i]);
    p = N;
    while (p > 1) begin
      for (int i = 0; i < p / 2; i++) t[i] = fadd(t[2*i], t[2*i+1]);
      p /= 2;
    end
    return fadd(t[0], w[N]);
  endfunction

  logic [31:0] eh_q [$], eo_q [$];
  int          rh_q [$], ch_q [$], ro_q [$], co_q [$];

  always @(negedge clk) begin
    if (ov_h) begin
      logic [31:0] e;
      int r, c;
      e = eh_q.pop_front(); r = rh_q.pop_front(); c = ch_q.pop_front();
      checks += 3;
      if (od_h !== e) begin
        failures++;
        if (failures < 10) $display("FAIL hidden row %0d: %h expected %h", r, od_h, e);
      end
      if (int'(oa_h) != r) failures++;
      if (cycle - c != 13) begin
        failures++;
        if (failures < 10) $display("FAIL hidden latency %0d", cycle - c);
      end
      n_h++;
    end
    if (ov_o) begin
      logic [31:0] e;
      int r, c;
      e = eo_q.pop_front(); r = ro_q.pop_front(); c = co_q.pop_front();
      checks += 3;
      if (od_o !== e) begin
        failures++;
        if (failures < 10) $display("FAIL output row %0d: %h expected %h", r, od_o, e);
      end
      if (int'(oa_o) != r) failures++;
      if (cycle - c != 11) begin
        failures++;
        if (failures < 10) $display("FAIL output latency %0d", cycle - c);
      end
      n_o++;
    end
  end

  localparam int EPOCHS = 8;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++)
      for (int c = 0; c <= N; c++) begin
        wh[r][c] = rand_uni(0.12);
        wb_en_h = 1; wb_row = 8'(r); wb_col = 9'(c); wb_data = wh[r][c];
        @(negedge clk);
      end
    wb_en_h = 0;
    for (int r = 0; r < RO; r++)
      for (int c = 0; c <= N; c++) begin
        wo[r][c] = rand_uni(0.12);
        wb_en_o = 1; wb_row = 8'(r); wb_col = 9'(c); wb_data = wo[r][c];
        @(negedge clk);
      end
    wb_en_o = 0;
    // Epoch e: write vector into bank e%2, request rows from bank (e+1)%2.
    for (int e = 0; e < EPOCHS; e++) begin
      int wbk;
      wbk     = e % 2;
      in_bank = 1'(wbk);
      rd_bank = 1'(1 - wbk);
      for (int i = 0; i < N; i++) vec[wbk][i] = rand_uni(1.0);
      for (int t = 0; t < N + 16; t++) begin
        // writes of the next vector
        in_we   = (t < N);
        in_addr = 8'(t);
        in_data = (t < N) ? vec[wbk][t] : 32'd0;
        // row requests on the previous vector
        row_en_h = (e > 0) && (t < N);
        row_en_o = (e > 0) && (t < RO);
        row      = 8'(t);
        if (row_en_h) begin
          eh_q.push_back(phi(dot(wh[t], vec[1 - wbk])));
          rh_q.push_back(t);
          ch_q.push_back(cycle);
        end
        if (row_en_o) begin
          eo_q.push_back(dot(wo[t], vec[1 - wbk]));
          ro_q.push_back(t);
          co_q.push_back(cycle);
        end
        @(negedge clk);
      end
    end
    in_we = 0; row_en_h = 0; row_en_o = 0;
    repeat (20) @(negedge clk);
    checks += 2;
    if (n_h != (EPOCHS - 1) * N) begin failures++; $display("FAIL hidden count %0d", n_h); end
    if (n_o != (EPOCHS - 1) * RO) begin failures++; $display("FAIL output count %0d", n_o); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
