// tb_beta_mem: loads 12 coefficients into 4 banks (3 tiles) and reads them
// with per-lane tiles, checking that lane l returns beta[tile*4+l].
module tb_beta_mem;
  localparam int F = 4, NSF = 3, W = 16, TW = $clog2(NSF), LW = $clog2(F);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we; logic [TW-1:0] wtile; logic [LW-1:0] wlane; logic [W-1:0] wdata;
  logic [TW-1:0] rtile [F]; logic [W-1:0] rdata [F];
  int checks = 0, failures = 0;

  beta_mem #(.F(F), .NSF(NSF), .W(W)) dut (.*);

  function automatic logic [W-1:0] bv(int j); return W'(16'hF000 + j * 19); endfunction

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wtile = '0; wlane = '0; wdata = '0;
    for (int l = 0; l < F; l++) rtile[l] = '0;
    @(negedge clk);
    for (int j = 0; j < F * NSF; j++) begin
      we = 1; wtile = TW'(j / F); wlane = LW'(j % F); wdata = bv(j); @(negedge clk);
    end
    we = 0;
    for (int c = 0; c < NSF; c++) begin
      for (int l = 0; l < F; l++) rtile[l] = TW'((c + l) % NSF);
      @(negedge clk);
      for (int l = 0; l < F; l++) begin
        checks++;
        if (rdata[l] !== bv(((c + l) % NSF) * F + l)) begin
          failures++; $display("FAIL lane %0d tile %0d got %0h", l, (c + l) % NSF, rdata[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
