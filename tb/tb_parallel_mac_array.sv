// tb_parallel_mac_array: runs the partial-sum loop nest (k, i, c with c
// innermost) through a 4-lane array against a read-first RAM model, once
// with 3 tiles (same address every 3 cycles, no bypass expected) and once
// with 1 tile (same address every cycle, bypass needed), and compares the
// final partial-sum matrix with ps[k][j] = sum_i SV[i][j]*x[k][i] computed
// in the testbench in single precision, in the same order (i ascending).
// Also checks the one-cycle issue-to-write latency.
module tb_parallel_mac_array;
  import fp32_ref::*;
  localparam int F = 4, DW = 32, PW = 32, AW = 4, KB = 2, MM = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic issue_valid, issue_first; logic [AW-1:0] issue_addr;
  logic [DW-1:0] sv [F]; logic [DW-1:0] x; logic [PW-1:0] ps_rd [F];
  logic wr_en; logic [AW-1:0] wr_addr; logic [PW-1:0] wr_data [F]; logic fwd;

  parallel_mac_array #(.F(F), .AW(AW)) dut (.*);

  // memory models: read data registered one cycle after the issue
  logic [PW-1:0] mem [1 << AW][F];
  int cur_k, cur_i, cur_c, nsf;
  int q_k, q_i, q_c;
  logic [31:0] sv_t [MM][12]; logic [31:0] x_t [KB][MM];
  function automatic logic [31:0] svv(int i, int j); return sv_t[i][j]; endfunction
  function automatic logic [31:0] xvv(int k, int i); return x_t[k][i]; endfunction

  always_ff @(posedge clk) begin
    for (int l = 0; l < F; l++) begin
      ps_rd[l] <= mem[issue_addr][l];
      sv[l]    <= svv(cur_i, cur_c * F + l);
    end
    x <= xvv(cur_k, cur_i);
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  int fwd_count, wr_count, issue_cycle, last_issue, lat_fail;
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (fwd) fwd_count++;
    if (wr_en) begin
      wr_count++;
      if (cyc != last_issue + 1) lat_fail++;
    end
    if (issue_valid) last_issue <= cyc;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(int tiles);
    nsf = tiles; fwd_count = 0; wr_count = 0; lat_fail = 0;
    for (int k = 0; k < KB; k++)
      for (int i = 0; i < MM; i++)
        for (int c = 0; c < tiles; c++) begin
          cur_k = k; cur_i = i; cur_c = c;
          issue_valid = 1; issue_first = (i == 0); issue_addr = AW'(k * tiles + c);
          @(negedge clk);
        end
    issue_valid = 0;
    repeat (3) @(negedge clk);
    for (int k = 0; k < KB; k++)
      for (int c = 0; c < tiles; c++)
        for (int l = 0; l < F; l++) begin
          logic [31:0] e;
          e = fmul(svv(0, c * F + l), xvv(k, 0));
          for (int i = 1; i < MM; i++) e = fadd(e, fmul(svv(i, c * F + l), xvv(k, i)));
          checks++;
          if (!same(mem[k * tiles + c][l], e)) begin
            failures++; $display("FAIL tiles=%0d ps[%0d][%0d] got %h exp %h", tiles, k, c * F + l,
                                 mem[k * tiles + c][l], e);
          end
        end
    checks++; if (wr_count != KB * MM * tiles) begin failures++; $display("FAIL write count %0d", wr_count); end
    checks++; if (lat_fail != 0) begin failures++; $display("FAIL latency"); end
    checks++;
    if (tiles == 1 && fwd_count == 0) begin failures++; $display("FAIL bypass never used"); end
    if (tiles > 1 && fwd_count != 0) begin failures++; $display("FAIL bypass used with %0d tiles", tiles); end
    $display("tiles=%0d bypass uses=%0d", tiles, fwd_count);
  endtask

  initial begin
    issue_valid = 0; issue_first = 0; issue_addr = '0; cur_k = 0; cur_i = 0; cur_c = 0;
    last_issue = -10;
    for (int i = 0; i < MM; i++) for (int j = 0; j < 12; j++) sv_t[i][j] = rnd(110, 126, 1);
    for (int k = 0; k < KB; k++) for (int i = 0; i < MM; i++) x_t[k][i] = rnd(110, 126, 0);
    for (int a = 0; a < (1 << AW); a++) for (int l = 0; l < F; l++) mem[a][l] = rnd(120, 130, 1);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    run(3);
    for (int a = 0; a < (1 << AW); a++) for (int l = 0; l < F; l++) mem[a][l] = rnd(120, 130, 1);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
