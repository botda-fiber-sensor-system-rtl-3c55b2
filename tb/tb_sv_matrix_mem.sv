// tb_sv_matrix_mem: loads a 5 x 12 support-vector matrix into 4 banks (3
// tiles) element by element and reads every (row, tile), checking that lane
// l returns SV[i][c*4+l] one cycle later.
module tb_sv_matrix_mem;
  localparam int F = 4, M = 5, NSF = 3, W = 16;
  localparam int RW = $clog2(M), TW = $clog2(NSF), LW = $clog2(F);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we; logic [RW-1:0] wrow, rrow; logic [TW-1:0] wtile, rtile; logic [LW-1:0] wlane;
  logic [W-1:0] wdata; logic [W-1:0] rdata [F];
  int checks = 0, failures = 0;

  sv_matrix_mem #(.F(F), .M(M), .NSF(NSF), .W(W)) dut (.*);

  function automatic logic [W-1:0] sv(int i, int j); return W'(i * 1000 + j * 7 + 3); endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wrow = '0; wtile = '0; wlane = '0; wdata = '0; rrow = '0; rtile = '0;
    @(negedge clk);
    for (int i = 0; i < M; i++)
      for (int j = 0; j < F * NSF; j++) begin
        we = 1; wrow = RW'(i); wtile = TW'(j / F); wlane = LW'(j % F); wdata = sv(i, j);
        @(negedge clk);
      end
    we = 0;
    for (int i = M - 1; i >= 0; i--)
      for (int c = 0; c < NSF; c++) begin
        rrow = RW'(i); rtile = TW'(c); @(negedge clk);
        for (int l = 0; l < F; l++) begin
          checks++;
          if (rdata[l] !== sv(i, c * F + l)) begin
            failures++; $display("FAIL SV[%0d][%0d] got %0d", i, c * F + l, rdata[l]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
