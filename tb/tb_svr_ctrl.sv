// tb_svr_ctrl: runs the sequencer for a full batch and a short one and
// checks the order of every issue against the loop nest (k, i, c with c
// innermost; then k, c; then k), the p_first flag, the phase lengths and the
// start-to-done cycle count n*(M*NSF + NSF + 1) + F + 3. A start while busy
// must be ignored.
module tb_svr_ctrl;
  localparam int B = 3, M = 4, NSF = 2, F = 3;
  localparam int KW = $clog2(B), IW = $clog2(M), TW = $clog2(NSF), NW = $clog2(B + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start; logic [NW-1:0] n_batch; logic busy, done; svr_pkg::phase_e phase;
  logic p_valid, p_first, f_valid, t_valid; logic [KW-1:0] p_k, f_k, t_k;
  logic [IW-1:0] p_i; logic [TW-1:0] p_c, f_c;

  svr_ctrl #(.B(B), .M(M), .NSF(NSF), .F(F)) dut (.*);

  int np, nf, nt, cyc, start_cyc, done_cyc, cur_n;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (p_valid) begin
      automatic int ek, ei, ec;
      ek = np / (M * NSF); ei = (np / NSF) % M; ec = np % NSF;
      checks++;
      if (int'(p_k) != ek || int'(p_i) != ei || int'(p_c) != ec || p_first != (ei == 0)) begin
        failures++; $display("FAIL p issue %0d: k%0d i%0d c%0d", np, p_k, p_i, p_c);
      end
      np++;
    end
    if (f_valid) begin
      checks++;
      if (int'(f_k) != nf / NSF || int'(f_c) != nf % NSF) begin failures++; $display("FAIL f issue %0d", nf); end
      if (np != cur_n * M * NSF) begin failures++; $display("FAIL f before p finished"); end
      nf++;
    end
    if (t_valid) begin
      checks++;
      if (int'(t_k) != nt) begin failures++; $display("FAIL t issue %0d", nt); end
      nt++;
    end
    if (done) done_cyc = cyc;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(int n);
    np = 0; nf = 0; nt = 0; cur_n = n; done_cyc = -1;
    start = 1; n_batch = NW'(n); start_cyc = cyc; @(negedge clk);
    n_batch = NW'(1);       // a start while busy must be ignored
    @(negedge clk); start = 0;
    wait (done); @(negedge clk); @(negedge clk);
    checks += 5;
    if (np != n * M * NSF) begin failures++; $display("FAIL np %0d", np); end
    if (nf != n * NSF) begin failures++; $display("FAIL nf %0d", nf); end
    if (nt != n) begin failures++; $display("FAIL nt %0d", nt); end
    if (done_cyc - start_cyc != n * (M * NSF + NSF + 1) + F + 3) begin
      failures++; $display("FAIL latency %0d", done_cyc - start_cyc);
    end
    if (busy) begin failures++; $display("FAIL still busy"); end
  endtask

  initial begin
    start = 0; n_batch = '0; cyc = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    run(B);
    run(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
