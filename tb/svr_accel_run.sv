// svr_accel_run: end-to-end test driver for one svr_accel instance, used by
// tb_svr_accel at reduced sizes.
//
// Loads a pseudo-random single-precision model (SV elements and gains
// between 2^-15 and 1 like normalised gains, signed coefficients, a signed
// bias) through the host ports, then runs a full batch, a short batch of one vector and a
// second full batch with new inputs. Every result y[k] is compared with
//   sum_j beta[j] * sum_i SV[i][j] * x[k][i] + b
// computed here in single precision in the hardware's order of additions
// (see ref_y), and the start-to-done cycle count with
// n*(M*NSF + NSF + 1) + F + 3. It counts how often each mechanism of the
// design occurred (partial-sum phase, write-back bypass, final-sum phase,
// adder-chain drain, tree output, short batch, model reuse); the caller
// fails any that never happened.
module svr_accel_run
  import fp32_ref::*;
#(
  parameter int NS = 12,
  parameter int M  = 6,
  parameter int F  = 4,
  parameter int B  = 3,
  parameter int SEED = 1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   n_psum_cycles,
  output int   n_bypass,
  output int   n_fsum_cycles,
  output int   n_drain_cycles,
  output int   n_results,
  output int   n_short_batches,
  output int   n_model_reuse,
  output bit   finished
);
  localparam int NSF = NS / F;
  localparam int KW = (B > 1) ? $clog2(B) : 1, IW = (M > 1) ? $clog2(M) : 1;
  localparam int TW = (NSF > 1) ? $clog2(NSF) : 1, LW = (F > 1) ? $clog2(F) : 1;
  localparam int NW = $clog2(B + 1);

  logic sv_we, beta_we, bias_we, x_we, start, busy, done, y_valid;
  logic [IW-1:0] sv_row, x_i; logic [TW-1:0] sv_tile, beta_tile; logic [LW-1:0] sv_lane, beta_lane;
  logic [31:0] sv_wdata, beta_wdata, x_wdata, bias_wdata, y_data;
  logic [KW-1:0] x_k, y_k; logic [NW-1:0] n_batch;

  svr_accel #(.NS(NS), .M(M), .F(F), .B(B)) dut (.*);

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

  int cyc = 0, start_cyc, done_cyc;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dut.phase == svr_pkg::PH_PSUM)   n_psum_cycles++;
      if (dut.pmac_fwd)                    n_bypass++;
      if (dut.phase == svr_pkg::PH_FSUM)   n_fsum_cycles++;
      if (dut.phase == svr_pkg::PH_DRAIN2) n_drain_cycles++;
      if (y_valid) begin
        checks++; n_results++;
        if (int'(y_k) >= B || got[y_k]) begin failures++; $display("FAIL result index %0d", y_k); end
        else begin
          got[y_k] = 1'b1;
          if (!same(y_data, exp_y[y_k])) begin
            failures++; $display("FAIL y[%0d] got %h exp %h", y_k, y_data, exp_y[y_k]);
          end
        end
      end
      if (done) done_cyc = cyc;
    end
  end

  task automatic load_model();
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
  endtask

  task automatic run_batch(int n);
    for (int k = 0; k < n; k++)
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
    start = 1; n_batch = NW'(n); start_cyc = cyc; @(negedge clk); start = 0;
    wait (done); @(negedge clk); @(negedge clk);
    checks += 2;
    if (done_cyc - start_cyc != n * (M * NSF + NSF + 1) + F + 3) begin
      failures++; $display("FAIL batch of %0d took %0d cycles", n, done_cyc - start_cyc);
    end
    for (int k = 0; k < n; k++) if (!got[k]) begin failures++; $display("FAIL y[%0d] missing", k); end
    if (n < B) n_short_batches++;
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0;
    n_psum_cycles = 0; n_bypass = 0; n_fsum_cycles = 0; n_drain_cycles = 0;
    n_results = 0; n_short_batches = 0; n_model_reuse = 0;
    void'($urandom(SEED));
    sv_we = 0; beta_we = 0; bias_we = 0; x_we = 0; start = 0;
    sv_row = '0; sv_tile = '0; sv_lane = '0; sv_wdata = '0; beta_tile = '0; beta_lane = '0;
    beta_wdata = '0; bias_wdata = '0; x_k = '0; x_i = '0; x_wdata = '0; n_batch = '0;
    wait (rst_n); @(negedge clk);
    load_model();
    run_batch(B);
    run_batch(1);
    run_batch(B);
    n_model_reuse = 2;
    finished = 1;
  end
endmodule
