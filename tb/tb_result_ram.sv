// tb_result_ram: self-checking test of the result memory at its full
// 768 x 512 x 3 depth.
//
// Writes random words at random addresses (and at the first and last
// address), reads them back through the one-cycle read port and compares with
// a testbench copy.
module tb_result_ram;
  localparam int DEPTH = 768 * 512 * 3;

  logic        clk = 0, wr_en = 0;
  logic [20:0] wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0, rd_data;
  int checks = 0, failures = 0;
  logic [31:0] model [int];

  result_ram dut (
    .clk(clk), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .rd_addr(rd_addr), .rd_data(rd_data)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int addrs [$];
    addrs.push_back(0);
    addrs.push_back(DEPTH - 1);
    for (int i = 0; i < 3000; i++) addrs.push_back(int'($urandom % DEPTH));
    @(negedge clk);
    foreach (addrs[i]) begin
      logic [31:0] d;
      d = $urandom;
      model[addrs[i]] = d;
      wr_en = 1; wr_addr = 21'(addrs[i]); wr_data = d;
      @(negedge clk);
    end
    wr_en = 0;
    foreach (addrs[i]) begin
      rd_addr = 21'(addrs[i]);
      @(negedge clk);
      checks++;
      if (rd_data !== model[addrs[i]]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d: %h expected %h", addrs[i], rd_data, model[addrs[i]]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
