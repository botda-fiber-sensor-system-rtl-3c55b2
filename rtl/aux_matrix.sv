// aux_matrix: the intermediate auxiliary matrix am[B][NSF] that collects the
// adder-chain outputs, am[k][c] = sum over the F lanes of tile c of
// ps[k][c*F+l]*beta[c*F+l].
//
// Written one word per cycle (wk, wc); a whole row am[rk][*] is read
// combinationally so that the adder tree can reduce it in one step. Held in
// registers (NSF is small: 4 at the default sizes), one single-precision word each; no reset, every entry that
// is read has been written in the same batch. The matrix itself is the
// reference design's; the register implementation is this design's choice.
module aux_matrix #(
  parameter int unsigned B   = svr_pkg::B_DEF,
  parameter int unsigned NSF = svr_pkg::NS_DEF / svr_pkg::F_DEF,
  parameter int unsigned W   = svr_pkg::FP_W,
  localparam int unsigned KW = (B   > 1) ? $clog2(B)   : 1,
  localparam int unsigned TW = (NSF > 1) ? $clog2(NSF) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [KW-1:0] wk,
  input  logic [TW-1:0] wc,
  input  logic [W-1:0]  wdata,
  input  logic [KW-1:0] rk,
  output logic [W-1:0]  row [NSF]
);
  logic [W-1:0] am [B][NSF];

  always_ff @(posedge clk) begin
    if (we) am[wk][wc] <= wdata;
  end

  always_comb begin
    for (int c = 0; c < NSF; c++) row[c] = am[rk][c];
  end
endmodule
