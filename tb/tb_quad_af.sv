// tb_quad_af: self-checking test of the two-stage quadratic activation.
//
// Feeds one input per cycle: fixed points of the function (phi(0.5)=0.75,
// phi(-1)=-1, phi(1)=1, phi(5)=phi(1), phi(-6)=phi(2)=0, ...), random values
// in (-2, 2), and random values up to +-2^30 that exercise the periodic
// reduction. Each output is compared with the reference; out_valid must come
// exactly two cycles after in_valid and the tag must follow the data.
module tb_quad_af;
  import tb_fp_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, out_valid;
  logic [31:0] x = 0, y;
  logic [15:0] in_tag = 0, out_tag;
  int checks = 0, failures = 0;
  int cycle = 0;

  quad_af #(.TAG_W(16)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .in_tag(in_tag),
    .out_valid(out_valid), .y(y), .out_tag(out_tag)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] exp_q [$];
  int          cyc_q [$];
  logic [31:0] stim [$];
  int          n_out = 0;

  // Scoreboard, sampling between clock edges.
  always @(negedge clk) begin
    if (out_valid) begin
      logic [31:0] e;
      int          c;
      e = exp_q.pop_front();
      c = cyc_q.pop_front();
      checks++;
      if (y !== e) begin
        failures++;
        if (failures < 10) $display("FAIL tag %0d: y=%h expected %h", out_tag, y, e);
      end
      checks++;
      if (cycle - c != 2) begin
        failures++;
        $display("FAIL latency %0d", cycle - c);
      end
      checks++;
      if (out_tag != 16'(n_out)) failures++;
      n_out++;
    end
  end

  initial begin
    stim.push_back(32'h3f00_0000); // 0.5  -> 0.75
    stim.push_back(32'hbf80_0000); // -1   -> -1
    stim.push_back(32'h3f80_0000); // 1    -> 1
    stim.push_back(32'h40a0_0000); // 5    -> 1
    stim.push_back(32'hc0c0_0000); // -6   -> 0
    stim.push_back(32'h4000_0000); // 2    -> 0
    stim.push_back(32'hc000_0000); // -2   -> 0
    stim.push_back(32'h0000_0000);
    stim.push_back(32'h8000_0000);
    stim.push_back(32'h4b80_0001); // large odd multiple
    for (int i = 0; i < 20000; i++) stim.push_back(rand_uni(2.0));
    for (int i = 0; i < 20000; i++) stim.push_back(rand_f32(-30, 30));
    // Known values first, independently of the reference.
    begin
      logic [31:0] known [7];
      known = '{32'h3f40_0000, 32'hbf80_0000, 32'h3f80_0000, 32'h3f80_0000,
                32'h0000_0000, 32'h0000_0000, 32'h0000_0000};
      for (int i = 0; i < 7; i++) begin
        checks++;
        if (phi(stim[i]) !== known[i]) begin
          failures++;
          $display("reference mismatch at %0d", i);
        end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (stim[i]) begin
      // Inputs change between edges; the next rising edge samples them.
      x        = stim[i];
      in_valid = 1'b1;
      in_tag   = 16'(i);
      exp_q.push_back(phi(stim[i]));
      cyc_q.push_back(cycle);
      @(negedge clk);
      // Occasional bubble.
      if (i % 97 == 0) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != stim.size()) begin
      failures++;
      $display("FAIL got %0d outputs of %0d", n_out, stim.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
