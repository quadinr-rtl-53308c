// tb_fp_adder_tree: self-checking test of the pipelined FP32 adder tree.
//
// Streams random 256-element vectors (one per cycle, with gaps) through the
// default 256-input tree and compares each sum with a reference tree that
// adds in the same pairwise order, rounding to FP32 at every node. Also
// checks the 8-cycle latency (log2 256) and that the tag follows the data.
// A second, 5-input instance checks the zero padding to 8 inputs.
module tb_fp_adder_tree;
  import tb_fp_pkg::*;

  localparam int N  = 256;
  localparam int N2 = 5;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, out_valid, in_valid2 = 0, out_valid2;
  logic [31:0] vin [N];
  logic [31:0] vin2 [N2];
  logic [31:0] sum, sum2;
  logic [7:0]  in_tag = 0, out_tag, out_tag2;
  int checks = 0, failures = 0, cycle = 0;

  fp_adder_tree #(.TAG_W(8)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in(vin), .in_tag(in_tag),
    .out_valid(out_valid), .sum(sum), .out_tag(out_tag)
  );
  fp_adder_tree #(.N(N2), .TAG_W(8)) dut2 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid2), .in(vin2), .in_tag(in_tag),
    .out_valid(out_valid2), .sum(sum2), .out_tag(out_tag2)
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

  function automatic logic [31:0] ref_tree(input logic [31:0] v [], input int n);
    int p;
    logic [31:0] t [];
    p = 1;
    while (p < n) p *= 2;
    t = new[p];
    for (int i = 0; i < p; i++) t[i] = (i < n) ? v[i] : 32'd0;
    while (p > 1) begin
      for (int i = 0; i < p / 2; i++) t[i] = fadd(t[2*i], t[2*i+1]);
      p /= 2;
    end
    return t[0];
  endfunction

  logic [31:0] exp_q [$], exp2_q [$];
  int          cyc_q [$];
  int          n_out = 0, n_out2 = 0;

  always @(negedge clk) begin
    if (out_valid) begin
      logic [31:0] e;
      int c;
      e = exp_q.pop_front();
      c = cyc_q.pop_front();
      checks += 3;
      if (sum !== e) begin
        failures++;
        if (failures < 10) $display("FAIL sum %h expected %h", sum, e);
      end
      if (cycle - c != 8) begin
        failures++;
        $display("FAIL latency %0d", cycle - c);
      end
      if (out_tag != 8'(n_out)) failures++;
      n_out++;
    end
    if (out_valid2) begin
      checks++;
      if (sum2 !== exp2_q.pop_front()) begin
        failures++;
        $display("FAIL small tree %h", sum2);
      end
      n_out2++;
    end
  end

  initial begin
    logic [31:0] v [];
    logic [31:0] v2 [];
    v  = new[N];
    v2 = new[N2];
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 600; k++) begin
      for (int i = 0; i < N; i++) begin
        v[i]   = (k % 3 == 0) ? rand_uni(1.0) : rand_f32(-8, 8);
        vin[i] = v[i];
      end
      for (int i = 0; i < N2; i++) begin
        v2[i]   = rand_uni(4.0);
        vin2[i] = v2[i];
      end
      in_valid  = 1'b1;
      in_valid2 = 1'b1;
      in_tag    = 8'(k);
      exp_q.push_back(ref_tree(v, N));
      exp2_q.push_back(ref_tree(v2, N2));
      cyc_q.push_back(cycle);
      @(negedge clk);
      if (k % 7 == 3) begin
        in_valid  = 1'b0;
        in_valid2 = 1'b0;
        repeat (k % 4) @(negedge clk);
      end
    end
    in_valid  = 1'b0;
    in_valid2 = 1'b0;
    repeat (12) @(negedge clk);
    checks++;
    if (n_out != 600 || n_out2 != 600) begin
      failures++;
      $display("FAIL output count %0d %0d", n_out, n_out2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
