// sdp_ram: one bank of simple dual-port RAM, the storage element of every
// partitioned memory in the accelerator (support-vector banks, coefficient
// banks, partial-sum banks, input batch buffer).
//
// One write port and one read port, both synchronous to clk. The read data is
// registered: rdata holds mem[raddr] one cycle after raddr was presented.
// When a read and a write hit the same address in the same cycle, the read
// returns the old word (read-first); the partial-sum pipeline relies on this
// and bypasses around it. Contents are not reset. Depth and width are
// parameters; the bank split follows the reference design, the port style is
// this design's choice.
module sdp_ram #(
  parameter int unsigned W     = svr_pkg::FP_W,
  parameter int unsigned DEPTH = 880,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
