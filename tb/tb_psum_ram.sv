// tb_psum_ram: writes whole tile rows into 3 partial-sum banks, then reads
// with a different address on every lane (as the skewed final-sum phase
// does) and with one common address, checking each lane's word.
module tb_psum_ram;
  localparam int F = 3, B = 2, NSF = 3, W = 40, DEPTH = B * NSF, AW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we; logic [AW-1:0] waddr; logic [W-1:0] wdata [F];
  logic [AW-1:0] raddr [F]; logic [W-1:0] rdata [F];
  int checks = 0, failures = 0;

  psum_ram #(.F(F), .B(B), .NSF(NSF), .W(W)) dut (.*);

  function automatic logic [W-1:0] pv(int a, int l); return W'(64'(a) * 64'h1_0000_0001 + 64'(l * 11)); endfunction

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; waddr = '0;
    for (int l = 0; l < F; l++) begin wdata[l] = '0; raddr[l] = '0; end
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = AW'(a);
      for (int l = 0; l < F; l++) wdata[l] = pv(a, l);
      @(negedge clk);
    end
    we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      for (int l = 0; l < F; l++) raddr[l] = AW'((a + l) % DEPTH);
      @(negedge clk);
      for (int l = 0; l < F; l++) begin
        checks++;
        if (rdata[l] !== pv((a + l) % DEPTH, l)) begin
          failures++; $display("FAIL lane %0d addr %0d got %0h", l, (a + l) % DEPTH, rdata[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
