// tb_intermediate_ram: self-checking test of the double-buffered activation
// RAM.
//
// Writes a random vector into one bank while the other bank, filled earlier,
// is being read, as the memory controller does, and checks that the read
// vector never changes while the other bank is written and that each bank
// holds exactly what was written into it.
module tb_intermediate_ram;
  localparam int D = 256;

  logic        clk = 0;
  logic        wr_en = 0, wr_bank = 0, rd_bank = 0;
  logic [7:0]  wr_addr = 0;
  logic [31:0] wr_data = 0, rd_vec [D];
  logic [31:0] m [2][D];
  int checks = 0, failures = 0;

  intermediate_ram dut (
    .clk(clk), .wr_en(wr_en), .wr_bank(wr_bank), .wr_addr(wr_addr),
    .wr_data(wr_data), .rd_bank(rd_bank), .rd_vec(rd_vec)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_bank(input int b);
    for (int i = 0; i < D; i++) begin
      checks++;
      if (rd_vec[i] !== m[b][i]) begin
        failures++;
        if (failures < 10) $display("FAIL bank %0d word %0d: %h expected %h", b, i, rd_vec[i], m[b][i]);
      end
    end
  endtask

  initial begin
    @(negedge clk);
    for (int e = 0; e < 40; e++) begin
      int wb;
      wb      = e % 2;
      wr_bank = 1'(wb);
      rd_bank = 1'(1 - wb);
      for (int i = 0; i < D; i++) begin
        // Words arrive in a scrambled order.
        int a;
        a = (i * 37 + e) % D;
        m[wb][a] = $urandom;
        wr_en = 1; wr_addr = 8'(a); wr_data = m[wb][a];
        @(negedge clk);
        if (e > 0 && i % 64 == 0) check_bank(1 - wb);
      end
      wr_en = 0;
      rd_bank = 1'(wb);
      #1;
      check_bank(wb);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
