// tb_fp32_add: 30,000 random sums of normal floats (close and far
// exponents, both signs, so both alignment and cancellation paths run) plus
// zero and exact-cancellation cases, compared with fp32_ref.
module tb_fp32_add;
  import fp32_ref::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  fp32_add dut (.a, .b, .y);

  task automatic one(logic [31:0] ta, logic [31:0] tb_);
    logic [31:0] e;
    a = ta; b = tb_; #1;
    e = fadd(ta, tb_);
    checks++;
    if (!same(y, e)) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h exp %h", ta, tb_, y, e);
    end
  endtask

  initial begin
    #2000000;
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    one(32'h3F800000, 32'h3F800000);   // 1 + 1
    one(32'h3F800000, 32'hBF800000);   // 1 - 1
    one(32'h00000000, 32'hC0490FDB);   // 0 + -pi
    one(32'h3F800000, 32'h33800000);   // 1 + 2^-24, tie to even
    one(32'h3F800001, 32'h33800000);   // tie rounding up
    one(32'h4B800000, 32'hBF800000);   // 2^24 - 1
    for (int n = 0; n < 10000; n++) one(rnd(100, 140, 1), rnd(100, 140, 1));
    for (int n = 0; n < 10000; n++) one(rnd(120, 124, 1), rnd(120, 124, 1));
    for (int n = 0; n < 10000; n++) begin
      logic [31:0] p;
      p = rnd(110, 130, 1);
      one(p, {~p[31], p[30:23], p[22:0] ^ 23'($urandom % 8)});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
