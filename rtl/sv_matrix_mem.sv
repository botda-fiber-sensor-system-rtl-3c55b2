// sv_matrix_mem: the transposed support-vector matrix SV[M][NS], partitioned
// into F banks so that F elements of one row can be read per cycle.
//
// Bank l holds columns l, l+F, l+2F, ... (column j = c*F + l, c being the
// tile, 0..NSF-1 with NSF = NS/F); inside a bank the word for row i and tile c
// sits at address i*NSF + c. This cyclic split is the reference design's; the
// address layout and the host write port (one element per cycle, addressed by
// row, tile and lane) are this design's choice.
// Read: present (rrow, rtile); one cycle later rdata[l] = SV[rrow][rtile*F+l].
module sv_matrix_mem #(
  parameter int unsigned F    = svr_pkg::F_DEF,
  parameter int unsigned M    = svr_pkg::M_DEF,
  parameter int unsigned NSF  = svr_pkg::NS_DEF / svr_pkg::F_DEF,
  parameter int unsigned W    = svr_pkg::FP_W,
  localparam int unsigned RW  = (M   > 1) ? $clog2(M)   : 1,
  localparam int unsigned TW  = (NSF > 1) ? $clog2(NSF) : 1,
  localparam int unsigned LW  = (F   > 1) ? $clog2(F)   : 1,
  localparam int unsigned DEPTH = M * NSF,
  localparam int unsigned AW  = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [RW-1:0] wrow,
  input  logic [TW-1:0] wtile,
  input  logic [LW-1:0] wlane,
  input  logic [W-1:0]  wdata,
  input  logic [RW-1:0] rrow,
  input  logic [TW-1:0] rtile,
  output logic [W-1:0]  rdata [F]
);
  logic [AW-1:0] waddr, raddr;
  assign waddr = AW'(wrow * NSF + wtile);
  assign raddr = AW'(rrow * NSF + rtile);

  for (genvar l = 0; l < F; l++) begin : g_bank
    sdp_ram #(.W(W), .DEPTH(DEPTH)) u_bank (
      .clk  (clk),
      .we   (we && (wlane == LW'(l))),
      .waddr(waddr),
      .wdata(wdata),
      .raddr(raddr),
      .rdata(rdata[l])
    );
  end
endmodule
