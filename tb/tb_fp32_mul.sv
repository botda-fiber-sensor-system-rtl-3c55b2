// tb_fp32_mul: 20,000 random products of normal floats over a wide exponent
// range, plus zero, tie-rounding and overflow/underflow corner cases,
// compared with correctly rounded products from fp32_ref.
module tb_fp32_mul;
  import fp32_ref::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  fp32_mul dut (.a, .b, .y);

  task automatic one(logic [31:0] ta, logic [31:0] tb_);
    logic [31:0] e;
    a = ta; b = tb_; #1;
    e = fmul(ta, tb_);
    checks++;
    if (!same(y, e)) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h exp %h", ta, tb_, y, e);
    end
  endtask

  initial begin
    #2000000;
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    one(32'h3F800000, 32'h40490FDB);   // 1 * pi
    one(32'h00000000, 32'h40490FDB);   // 0 * pi
    one(32'hBF800000, 32'h3F800000);   // -1 * 1
    one(32'h3F800001, 32'h3F800001);   // rounding of a tiny excess
    one(32'h7F000000, 32'h7F000000);   // overflow
    one(32'h00800000, 32'h00800000);   // underflow
    for (int n = 0; n < 20000; n++) one(rnd(64, 190, 1), rnd(64, 190, 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
