// tb_cascaded_mac_array: a 5-lane adder chain against per-lane memory
// models that answer each lane's skewed key one cycle later. Issues 12
// groups back to back and then 3 with gaps; each result must equal
// sum_l ps[l][key]*beta[l][key] (computed in the testbench), come out in
// issue order, F+1 cycles after its issue. Sums are in single precision,
// accumulated in lane order as the adder chain does.
module tb_cascaded_mac_array;
  import fp32_ref::*;
  localparam int F = 5, PW = 32, BW = 32, AW = 32, KEY_W = 4, NK = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic issue_valid; logic [KEY_W-1:0] issue_key;
  logic lane_valid [F]; logic [KEY_W-1:0] lane_key [F];
  logic [PW-1:0] ps [F]; logic [BW-1:0] beta [F];
  logic out_valid; logic [KEY_W-1:0] out_key; logic [AW-1:0] out_sum;

  cascaded_mac_array #(.F(F), .KEY_W(KEY_W)) dut (
    .clk, .rst_n, .issue_valid, .issue_key, .lane_valid, .lane_key, .ps, .beta,
    .out_valid, .out_key, .out_sum);

  logic [31:0] ps_t [F][NK]; logic [31:0] b_t [F][NK];
  function automatic logic [31:0] psv(int l, int k); return ps_t[l][k]; endfunction
  function automatic logic [31:0] bv(int l, int k); return b_t[l][k]; endfunction

  always_ff @(posedge clk) begin
    for (int l = 0; l < F; l++) begin
      ps[l]   <= psv(l, int'(lane_key[l]));
      beta[l] <= bv(l, int'(lane_key[l]));
    end
  end

  int cyc = 0;
  int issue_cyc [$]; int issue_k [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && issue_valid) begin issue_cyc.push_back(cyc); issue_k.push_back(int'(issue_key)); end
    if (rst_n && out_valid) begin
      automatic int ic, ik; automatic logic [31:0] e;
      ic = issue_cyc.pop_front(); ik = issue_k.pop_front();
      e = fmul(psv(0, ik), bv(0, ik));
      for (int l = 1; l < F; l++) e = fadd(e, fmul(psv(l, ik), bv(l, ik)));
      checks += 3;
      if (int'(out_key) != ik) begin failures++; $display("FAIL key %0d exp %0d", out_key, ik); end
      if (!same(out_sum, e)) begin failures++; $display("FAIL sum key %0d got %h exp %h", ik, out_sum, e); end
      if (cyc - ic != F + 1) begin failures++; $display("FAIL latency %0d", cyc - ic); end
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    issue_valid = 0; issue_key = '0;
    for (int l = 0; l < F; l++) for (int k = 0; k < NK; k++) begin
      ps_t[l][k] = rnd(115, 135, 1); b_t[l][k] = rnd(115, 135, 1);
    end
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int g = 0; g < 12; g++) begin issue_valid = 1; issue_key = KEY_W'(g); @(negedge clk); end
    issue_valid = 0;
    for (int g = 12; g < 15; g++) begin
      repeat (g - 10) @(negedge clk);
      issue_valid = 1; issue_key = KEY_W'(g); @(negedge clk); issue_valid = 0;
    end
    repeat (F + 4) @(negedge clk);
    checks++; if (issue_cyc.size() != 0 || checks != 46) begin failures++; $display("FAIL %0d results missing", issue_cyc.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
