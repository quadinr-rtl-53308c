// tb_mem_ctrl: self-checking test of the epoch scheduler.
//
// Runs groups of 6 and 1 pixels through a small schedule (5 stages, 8 hidden
// rows, 3 output rows, 20-cycle epochs) and compares, cycle by cycle, every
// controller output with values computed from the elapsed cycle count t:
// epoch e = t / EPOCH, cnt = t mod EPOCH; stage s is active for
// s <= e < s + npix on pixel e - s; row_en while cnt < rows; banks alternate
// with e. Also checks that done pulses exactly (npix + 4) * EPOCH cycles
// after start, that coord_advance fires once per pixel, and that a start
// while busy is ignored.
module tb_mem_ctrl;
  localparam int NS = 5, RH = 8, RO = 3, EP = 20, PW = 8;

  logic          clk = 0, rst_n = 0, start = 0;
  logic [PW-1:0] num_pixels = 0;
  logic          busy, done, wr_bank, rd_bank, coord_clear, coord_advance;
  logic [4:0]    cnt, row_addr;
  logic          stage_active [NS];
  logic [PW-1:0] stage_pix [NS];
  logic          row_en [NS];
  int checks = 0, failures = 0;
  int n_adv = 0;

  mem_ctrl #(.NSTAGE(NS), .ROWS_HID(RH), .ROWS_OUT(RO), .EPOCH(EP), .PIX_W(PW)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .num_pixels(num_pixels),
    .busy(busy), .done(done), .cnt(cnt), .wr_bank(wr_bank), .rd_bank(rd_bank),
    .stage_active(stage_active), .stage_pix(stage_pix), .row_en(row_en),
    .row_addr(row_addr), .coord_clear(coord_clear), .coord_advance(coord_advance)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run_group(input int npix);
    int total;
    total = (npix + NS - 1) * EP;
    num_pixels = PW'(npix);
    start = 1;
    #1;
    expect_eq(int'(coord_clear), 1, "coord_clear");
    @(negedge clk);
    start = 0;
    n_adv = 0;
    for (int t = 0; t < total; t++) begin
      int e, c;
      e = t / EP;
      c = t % EP;
      // A start while busy must be ignored.
      start = (t == 7);
      #1;
      expect_eq(int'(busy), 1, "busy");
      expect_eq(int'(done), 0, "done early");
      expect_eq(int'(cnt), c, "cnt");
      expect_eq(int'(row_addr), c, "row_addr");
      expect_eq(int'(wr_bank), e % 2, "wr_bank");
      expect_eq(int'(rd_bank), 1 - e % 2, "rd_bank");
      expect_eq(int'(coord_clear), 0, "coord_clear while busy");
      for (int s = 0; s < NS; s++) begin
        int act;
        act = (e >= s && e < s + npix) ? 1 : 0;
        expect_eq(int'(stage_active[s]), act, $sformatf("stage_active[%0d] t=%0d", s, t));
        if (act) expect_eq(int'(stage_pix[s]), e - s, "stage_pix");
        expect_eq(int'(row_en[s]), (act && c < ((s == NS - 1) ? RO : RH)) ? 1 : 0, "row_en");
      end
      expect_eq(int'(coord_advance), (c == EP - 1 && e < npix) ? 1 : 0, "coord_advance");
      if (coord_advance) n_adv++;
      @(negedge clk);
    end
    start = 0;
    expect_eq(int'(done), 1, "done");
    expect_eq(int'(busy), 0, "busy after");
    expect_eq(n_adv, npix, "advances");
    @(negedge clk);
    expect_eq(int'(done), 0, "done one cycle");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // start with zero pixels does nothing
    num_pixels = 0; start = 1;
    @(negedge clk);
    start = 0;
    expect_eq(int'(busy), 0, "zero group");
    run_group(6);
    repeat (3) @(negedge clk);
    run_group(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
