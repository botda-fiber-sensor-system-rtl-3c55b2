// tb_x_buffer: writes a batch of 3 vectors of 7 elements and reads them back
// in the order the partial-sum phase uses, checking x[k][i] one cycle later.
module tb_x_buffer;
  localparam int B = 3, M = 7, W = 16, KW = $clog2(B), IW = $clog2(M);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we; logic [KW-1:0] wk, rk; logic [IW-1:0] wi, ri; logic [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  x_buffer #(.B(B), .M(M), .W(W)) dut (.*);

  function automatic logic [W-1:0] xv(int k, int i); return W'(k * 313 + i * 17 + 1); endfunction

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wk = '0; wi = '0; wdata = '0; rk = '0; ri = '0;
    @(negedge clk);
    for (int k = 0; k < B; k++)
      for (int i = 0; i < M; i++) begin
        we = 1; wk = KW'(k); wi = IW'(i); wdata = xv(k, i); @(negedge clk);
      end
    we = 0;
    for (int k = 0; k < B; k++)
      for (int i = 0; i < M; i++) begin
        rk = KW'(k); ri = IW'(i); @(negedge clk);
        checks++;
        if (rdata !== xv(k, i)) begin failures++; $display("FAIL x[%0d][%0d] got %0d", k, i, rdata); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
