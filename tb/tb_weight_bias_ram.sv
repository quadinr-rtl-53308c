// tb_weight_bias_ram: self-checking test of the weight & bias memory.
//
// Fills the default 256 x 256 (+bias) memory word by word with random data
// kept in a testbench copy, overwrites some words, then reads rows in random
// order, one request per cycle, and checks every weight and the bias of each
// row one cycle after the request. Writes to out-of-range rows must be
// ignored.
module tb_weight_bias_ram;
  import tb_fp_pkg::*;

  localparam int ROWS = 256, COLS = 256;

  logic        clk = 0;
  logic        wr_en = 0, rd_en = 0;
  logic [7:0]  wr_row = 0, rd_row = 0;
  logic [8:0]  wr_col = 0;
  logic [31:0] wr_data = 0, rd_w [COLS], rd_b;
  logic [31:0] wm [ROWS][COLS];
  logic [31:0] bm [ROWS];
  int checks = 0, failures = 0;

  weight_bias_ram dut (
    .clk(clk), .wr_en(wr_en), .wr_row(wr_row), .wr_col(wr_col), .wr_data(wr_data),
    .rd_en(rd_en), .rd_row(rd_row), .rd_w(rd_w), .rd_b(rd_b)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int r, input int c, input logic [31:0] d);
    wr_en = 1; wr_row = 8'(r); wr_col = 9'(c); wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c <= COLS; c++) begin
        logic [31:0] d;
        d = $urandom;
        if (c < COLS) wm[r][c] = d; else bm[r] = d;
        wr(r, c, d);
      end
    end
    for (int i = 0; i < 500; i++) begin
      int r, c;
      logic [31:0] d;
      r = int'($urandom % ROWS);
      c = int'($urandom % (COLS + 1));
      d = $urandom;
      if (c < COLS) wm[r][c] = d; else bm[r] = d;
      wr(r, c, d);
    end
    // Reads, back to back: the data of request k is checked at request k+1.
    begin
      int prev = -1;
      for (int i = 0; i <= 600; i++) begin
        int r;
        r = int'($urandom % ROWS);
        rd_en  = (i < 600);
        rd_row = 8'(r);
        @(negedge clk);
        if (i < 600) begin
          for (int c = 0; c < COLS; c++) begin
            checks++;
            if (rd_w[c] !== wm[r][c]) begin
              failures++;
              if (failures < 10) $display("FAIL w[%0d][%0d] %h expected %h", r, c, rd_w[c], wm[r][c]);
            end
          end
          checks++;
          if (rd_b !== bm[r]) begin
            failures++;
            $display("FAIL bias[%0d]", r);
          end
        end
        if (i < 600) prev = r;
      end
      // rd_en low: output holds.
      rd_en = 0; rd_row = 8'(prev + 1);
      @(negedge clk);
      checks++;
      if (rd_b !== bm[prev]) begin
        failures++;
        $display("FAIL hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
