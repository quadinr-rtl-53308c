// tb_mac_array: self-checking test of the 256-multiplier array.
//
// Streams random activation and weight vectors through the default 256-wide
// array and checks every product against the reference, the one-cycle
// latency and the tag.
module tb_mac_array;
  import tb_fp_pkg::*;

  localparam int N = 256;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, out_valid;
  logic [31:0] act [N], w [N], prod [N];
  logic [7:0]  in_tag = 0, out_tag;
  int checks = 0, failures = 0, cycle = 0;

  mac_array #(.TAG_W(8)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .act(act), .w(w),
    .in_tag(in_tag), .out_valid(out_valid), .prod(prod), .out_tag(out_tag)
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
  int          cyc_q [$];
  int          n_out = 0;

  always @(negedge clk) begin
    if (out_valid) begin
      int c;
      c = cyc_q.pop_front();
      for (int i = 0; i < N; i++) begin
        logic [31:0] e;
        e = exp_q.pop_front();
        checks++;
        if (prod[i] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL prod[%0d] %h expected %h", i, prod[i], e);
        end
      end
      checks += 2;
      if (cycle - c != 1) begin
        failures++;
        $display("FAIL latency %0d", cycle - c);
      end
      if (out_tag != 8'(n_out)) failures++;
      n_out++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 300; k++) begin
      for (int i = 0; i < N; i++) begin
        act[i] = rand_f32(-10, 10);
        w[i]   = rand_uni(0.5);
        exp_q.push_back(fmul(act[i], w[i]));
      end
      in_valid = 1'b1;
      in_tag   = 8'(k);
      cyc_q.push_back(cycle);
      @(negedge clk);
      if (k % 5 == 2) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (n_out != 300) begin
      failures++;
      $display("FAIL output count %0d", n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
