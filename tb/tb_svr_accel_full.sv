// tb_svr_accel_full: one complete batch at the full default size: 1136
// support vectors of 220 frequencies on 284 lanes, a batch of 40 feature
// vectors. Loads a pseudo-random single-precision model and batch (gains
// and SV elements between 2^-15 and 1, signed coefficients and bias), runs
// the batch and checks all 40 results against
// sum_j beta[j]*sum_i SV[i][j]*x[k][i] + b computed here in single precision
// in the hardware's order of additions, and the batch time of 40*(220*4 + 4 + 1) + 284 + 3 = 35 687 cycles.
module tb_svr_accel_full;
  import svr_pkg::*;
  import fp32_ref::*;
  localparam int NS = NS_DEF, M = M_DEF, F = F_DEF, B = B_DEF, NSF = NS / F;
  localparam int KW = $clog2(B), IW = $clog2(M), TW = $clog2(NSF), LW = $clog2(F), NW = $clog2(B + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sv_we, beta_we, bias_we, x_we, start, busy, done, y_valid;
  logic [IW-1:0] sv_row, x_i; logic [TW-1:0] sv_tile, beta_tile; logic [LW-1:0] sv_lane, beta_lane;
  logic [31:0] sv_wdata, beta_wdata, x_wdata, bias_wdata, y_data;
  logic [KW-1:0] x_k, y_k; logic [NW-1:0] n_batch;

  svr_accel dut (.*);

  logic [31:0] sv_m [M][NS]; logic [31:0] beta_m [NS]; logic [31:0] bias_m; logic [31:0] x_m [B][M];
  logic [31:0] exp_y [B]; bit got [B];
  // reference, in the order the hardware adds: partial sums over i
  // ascending, chain sums over the lanes of a tile, pairwise tree over the
  // tiles (padded with +0 to a power of two), then the bias
  function automatic logic [31:0] ref_y(int k);
    logic [31:0] ps [NS];
    logic [31:0] t [];
    int p2;
    for (int j = 0; j < NS; j++) begin
      ps[j] = fmul(sv_m[0][j], x_m[k][0]);
      for (int i = 1; i < M; i++) ps[j] = fadd(ps[j], fmul(sv_m[i][j], x_m[k][i]));
    end
    p2 = 1; while (p2 < NSF) p2 *= 2;
    t = new[p2];
    for (int c = 0; c < p2; c++) t[c] = 32'd0;
    for (int c = 0; c < NSF; c++) begin
      t[c] = fmul(ps[c * F], beta_m[c * F]);
      for (int l = 1; l < F; l++) t[c] = fadd(t[c], fmul(ps[c * F + l], beta_m[c * F + l]));
    end
    for (int w = p2; w > 1; w /= 2)
      for (int n = 0; n < w / 2; n++) t[n] = fadd(t[2 * n], t[2 * n + 1]);
    return fadd(t[0], bias_m);
  endfunction

  int cyc = 0, start_cyc, done_cyc = -1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && y_valid) begin
      checks++;
      if (got[y_k]) begin failures++; $display("FAIL duplicate y[%0d]", y_k); end
      got[y_k] = 1'b1;
      if (!same(y_data, exp_y[y_k])) begin
        failures++; $display("FAIL y[%0d] got %h exp %h", y_k, y_data, exp_y[y_k]);
      end
    end
    if (rst_n && done) done_cyc = cyc;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    sv_we = 0; beta_we = 0; bias_we = 0; x_we = 0; start = 0;
    sv_row = '0; sv_tile = '0; sv_lane = '0; sv_wdata = '0; beta_tile = '0; beta_lane = '0;
    beta_wdata = '0; bias_wdata = '0; x_k = '0; x_i = '0; x_wdata = '0; n_batch = '0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < M; i++)
      for (int j = 0; j < NS; j++) begin
        sv_m[i][j] = rnd(112, 126, 0);
        sv_we = 1; sv_row = IW'(i); sv_tile = TW'(j / F); sv_lane = LW'(j % F); sv_wdata = sv_m[i][j];
        @(negedge clk);
      end
    sv_we = 0;
    for (int j = 0; j < NS; j++) begin
      beta_m[j] = rnd(115, 130, 1);
      beta_we = 1; beta_tile = TW'(j / F); beta_lane = LW'(j % F); beta_wdata = beta_m[j];
      @(negedge clk);
    end
    beta_we = 0;
    bias_m = rnd(130, 134, 1);
    bias_we = 1; bias_wdata = bias_m; @(negedge clk); bias_we = 0;
    for (int k = 0; k < B; k++)
      for (int i = 0; i < M; i++) begin
        x_m[k][i] = rnd(112, 126, 0);
        x_we = 1; x_k = KW'(k); x_i = IW'(i); x_wdata = x_m[k][i];
        @(negedge clk);
      end
    x_we = 0;
    for (int k = 0; k < B; k++) begin
      got[k] = 1'b0;
      exp_y[k] = ref_y(k);
    end
    start = 1; n_batch = NW'(B); start_cyc = cyc; @(negedge clk); start = 0;
    wait (done); @(negedge clk); @(negedge clk);
    checks++;
    if (done_cyc - start_cyc != B * (M * NSF + NSF + 1) + F + 3) begin
      failures++; $display("FAIL batch took %0d cycles", done_cyc - start_cyc);
    end
    $display("batch of %0d: %0d cycles from start to done", B, done_cyc - start_cyc);
    for (int k = 0; k < B; k++) begin
      checks++;
      if (!got[k]) begin failures++; $display("FAIL y[%0d] missing", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
