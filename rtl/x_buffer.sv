// x_buffer: the batch of input feature vectors X[B][M] (normalised gains of B
// measured Brillouin gain spectra).
//
// A single bank at address k*M + i. One element x[k][i] is read per cycle and
// broadcast to every MAC lane, as the reference design does; rdata follows
// (rk, ri) by one cycle. The host writes one element per cycle while the
// accelerator is idle. Single banking and addressing are this design's choice.
module x_buffer #(
  parameter int unsigned B   = svr_pkg::B_DEF,
  parameter int unsigned M   = svr_pkg::M_DEF,
  parameter int unsigned W   = svr_pkg::FP_W,
  localparam int unsigned KW = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned IW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned DEPTH = B * M,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [KW-1:0] wk,
  input  logic [IW-1:0] wi,
  input  logic [W-1:0]  wdata,
  input  logic [KW-1:0] rk,
  input  logic [IW-1:0] ri,
  output logic [W-1:0]  rdata
);
  sdp_ram #(.W(W), .DEPTH(DEPTH)) u_bank (
    .clk  (clk),
    .we   (we),
    .waddr(AW'(wk * M + wi)),
    .wdata(wdata),
    .raddr(AW'(rk * M + ri)),
    .rdata(rdata)
  );
endmodule
