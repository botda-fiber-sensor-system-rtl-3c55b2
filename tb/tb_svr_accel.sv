// tb_svr_accel: end-to-end test of the accelerator at two reduced sizes.
// Instance A has 12 support vectors on 4 lanes (3 tiles), 6 frequencies and
// batches of 3; instance B has 4 support vectors on 4 lanes (1 tile, so the
// partial-sum write-back bypass is exercised), 3 frequencies and batches of 2.
// Each runs a full batch, a one-vector batch and a second full batch on the
// same model (see svr_accel_run). Every mechanism must occur at least once.
module tb_svr_accel;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  int ca, fa, pa, ba, sa, da, ra, ha, ua; bit done_a;
  int cb, fb, pb, bb, sb, db, rb, hb, ub; bit done_b;

  svr_accel_run #(.NS(12), .M(6), .F(4), .B(3), .SEED(11)) run_a (
    .clk, .rst_n, .checks(ca), .failures(fa), .n_psum_cycles(pa), .n_bypass(ba), .n_fsum_cycles(sa),
    .n_drain_cycles(da), .n_results(ra), .n_short_batches(ha), .n_model_reuse(ua), .finished(done_a));
  svr_accel_run #(.NS(4), .M(3), .F(4), .B(2), .SEED(23)) run_b (
    .clk, .rst_n, .checks(cb), .failures(fb), .n_psum_cycles(pb), .n_bypass(bb), .n_fsum_cycles(sb),
    .n_drain_cycles(db), .n_results(rb), .n_short_batches(hb), .n_model_reuse(ub), .finished(done_b));

  task automatic need(int count, string what);
    checks++;
    $display("mechanism %-28s %0d", what, count);
    if (count == 0) begin failures++; $display("FAIL mechanism never occurred: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    wait (done_a && done_b);
    need(pa + pb, "partial-sum phase cycles");
    need(bb,      "write-back bypass");
    need(sa + sb, "final-sum phase cycles");
    need(da + db, "adder-chain drain cycles");
    need(ra + rb, "adder-tree results");
    need(ha + hb, "short batches");
    need(ua + ub, "model reused");
    checks += ca + cb; failures += fa + fb;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
