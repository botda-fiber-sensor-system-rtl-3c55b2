// beta_mem: the support-vector coefficients beta[NS] (beta_j = alpha_j -
// alpha_j*), partitioned into F banks of NSF words; bank l holds beta[c*F+l]
// at address c, the same cyclic split as the support vectors and partial sums.
//
// The host writes one coefficient per cycle, addressed by tile and lane. Each
// lane has its own read address (the tile), because the cascaded MAC array
// reads lane l one cycle after lane l-1; rdata[l] follows rtile[l] by one
// cycle. The split is the reference design's; ports are this design's choice.
module beta_mem #(
  parameter int unsigned F   = svr_pkg::F_DEF,
  parameter int unsigned NSF = svr_pkg::NS_DEF / svr_pkg::F_DEF,
  parameter int unsigned W   = svr_pkg::FP_W,
  localparam int unsigned TW = (NSF > 1) ? $clog2(NSF) : 1,
  localparam int unsigned LW = (F   > 1) ? $clog2(F)   : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [TW-1:0] wtile,
  input  logic [LW-1:0] wlane,
  input  logic [W-1:0]  wdata,
  input  logic [TW-1:0] rtile [F],
  output logic [W-1:0]  rdata [F]
);
  for (genvar l = 0; l < F; l++) begin : g_bank
    sdp_ram #(.W(W), .DEPTH(NSF)) u_bank (
      .clk  (clk),
      .we   (we && (wlane == LW'(l))),
      .waddr(wtile),
      .wdata(wdata),
      .raddr(rtile[l]),
      .rdata(rdata[l])
    );
  end
endmodule
