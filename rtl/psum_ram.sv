// psum_ram: the partial-sum matrix ps[B][NS], partitioned into F dual-port
// banks of B*NSF words. Bank l holds ps[k][c*F+l] at address k*NSF + c.
//
// Write: all F lanes together at one address (the parallel MAC array writes
// back a full tile row). Read: every lane has its own address, because in the
// final-sum phase the cascaded MAC array reads bank l one cycle after bank
// l-1; in the partial-sum phase all lanes get the same address. rdata[l]
// follows raddr[l] by one cycle, read-first on a collision. The cyclic split
// and the dual-port mapping follow the reference design; per-lane read
// addresses are this design's choice.
module psum_ram #(
  parameter int unsigned F   = svr_pkg::F_DEF,
  parameter int unsigned B   = svr_pkg::B_DEF,
  parameter int unsigned NSF = svr_pkg::NS_DEF / svr_pkg::F_DEF,
  parameter int unsigned W   = svr_pkg::FP_W,
  localparam int unsigned DEPTH = B * NSF,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata [F],
  input  logic [AW-1:0] raddr [F],
  output logic [W-1:0]  rdata [F]
);
  for (genvar l = 0; l < F; l++) begin : g_bank
    sdp_ram #(.W(W), .DEPTH(DEPTH)) u_bank (
      .clk  (clk),
      .we   (we),
      .waddr(waddr),
      .wdata(wdata[l]),
      .raddr(raddr[l]),
      .rdata(rdata[l])
    );
  end
endmodule
