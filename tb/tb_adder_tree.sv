// tb_adder_tree: two trees, one with 4 inputs (a power of two) and one with
// 5 (padded to 8), fed one random single-precision row per cycle; every
// result must equal the pairwise row sum plus bias, rounded as the tree
// rounds, one cycle later, with its tag.
module tb_adder_tree;
  import fp32_ref::*;
  localparam int W = 32, TAG_W = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid; logic [TAG_W-1:0] in_tag; logic [W-1:0] bias;
  logic [W-1:0] in4 [4]; logic [W-1:0] in5 [5];
  logic v4, v5; logic [TAG_W-1:0] t4, t5; logic [W-1:0] s4, s5;

  adder_tree #(.N(4), .TAG_W(TAG_W)) dut4 (.clk, .rst_n, .in_valid, .in_tag, .in(in4), .bias,
    .out_valid(v4), .out_tag(t4), .out_sum(s4));
  adder_tree #(.N(5), .TAG_W(TAG_W)) dut5 (.clk, .rst_n, .in_valid, .in_tag, .in(in5), .bias,
    .out_valid(v5), .out_tag(t5), .out_sum(s5));

  logic [31:0] e4 [64]; logic [31:0] e5 [64];

  always @(posedge clk) if (rst_n) begin
    if (v4) begin checks += 2; if (!same(s4, e4[t4])) begin failures++; $display("FAIL N=4 tag %0d", t4); end
                               if (!v5 || t5 != t4) failures++; end
    if (v5) begin checks++; if (!same(s5, e5[t5])) begin failures++; $display("FAIL N=5 tag %0d", t5); end end
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nout;
    in_valid = 0; in_tag = '0; bias = rnd(125, 130, 1);
    for (int n = 0; n < 4; n++) in4[n] = '0;
    for (int n = 0; n < 5; n++) in5[n] = '0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int t = 0; t < 20; t++) begin
      for (int n = 0; n < 5; n++) begin
        in5[n] = rnd(118, 132, 1);
        if (n < 4) in4[n] = in5[n];
      end
      e4[t] = fadd(fadd(fadd(in4[0], in4[1]), fadd(in4[2], in4[3])), bias);
      e5[t] = fadd(fadd(fadd(fadd(in5[0], in5[1]), fadd(in5[2], in5[3])), in5[4]), bias);
      in_valid = 1; in_tag = TAG_W'(t); @(negedge clk);
    end
    in_valid = 0; nout = checks; @(negedge clk); @(negedge clk);
    checks++; if (checks - 1 != 60) begin failures++; $display("FAIL result count %0d", checks - 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
