// tb_aux_matrix: writes every entry of a 3 x 4 auxiliary matrix in a
// scrambled order and reads each row back, checking all entries.
module tb_aux_matrix;
  localparam int B = 3, NSF = 4, W = 64, KW = $clog2(B), TW = $clog2(NSF);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we; logic [KW-1:0] wk, rk; logic [TW-1:0] wc; logic [W-1:0] wdata; logic [W-1:0] row [NSF];
  int checks = 0, failures = 0;

  aux_matrix #(.B(B), .NSF(NSF), .W(W)) dut (.*);

  function automatic logic [W-1:0] av(int k, int c); return W'(64'hDEAD_0000_0000 + 64'(k * 16 + c)); endfunction

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wk = '0; wc = '0; wdata = '0; rk = '0;
    @(negedge clk);
    for (int n = 0; n < B * NSF; n++) begin
      automatic int p = (n * 5) % (B * NSF);
      we = 1; wk = KW'(p / NSF); wc = TW'(p % NSF); wdata = av(p / NSF, p % NSF); @(negedge clk);
    end
    we = 0;
    for (int k = 0; k < B; k++) begin
      rk = KW'(k); #1;
      for (int c = 0; c < NSF; c++) begin
        checks++;
        if (row[c] !== av(k, c)) begin failures++; $display("FAIL am[%0d][%0d] = %0h", k, c, row[c]); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
