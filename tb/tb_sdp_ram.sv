// tb_sdp_ram: self-checking test of one RAM bank. Fills every word with a
// known pattern, reads it back checking the one-cycle read latency, then
// reads and writes one address in the same cycle and checks that the old
// word is returned (read-first) and the new one afterwards.
module tb_sdp_ram;
  localparam int W = 12, DEPTH = 10, AW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we; logic [AW-1:0] waddr, raddr; logic [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  sdp_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);

  function automatic logic [W-1:0] pat(int a, int s); return W'(a * 37 + s * 101 + 5); endfunction
  task automatic check(logic [W-1:0] got, logic [W-1:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h exp %0h", what, got, exp); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    for (int s = 0; s < 2; s++) begin
      for (int a = 0; a < DEPTH; a++) begin
        we = 1; waddr = AW'(a); wdata = pat(a, s); @(negedge clk);
      end
      we = 0;
      for (int a = 0; a < DEPTH; a++) begin
        raddr = AW'(a); @(negedge clk);
        check(rdata, pat(a, s), $sformatf("read %0d pass %0d", a, s));
      end
    end
    // read and write the same address together
    raddr = AW'(3); waddr = AW'(3); wdata = 12'hABC; we = 1; @(negedge clk);
    we = 0; check(rdata, pat(3, 1), "read-first on collision");
    @(negedge clk); check(rdata, 12'hABC, "new word after collision");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
