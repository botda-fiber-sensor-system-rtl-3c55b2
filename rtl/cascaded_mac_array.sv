// cascaded_mac_array: F single-precision multipliers feeding a pipelined
// adder chain, the final-sum engine (loops L4-L5 of the batch algorithm, L5
// unrolled by F).
//
// One group (k, c) enters per cycle with issue_valid and an opaque issue_key
// (the top packs k, c and the partial-sum address into it). The key walks
// down a chain of registers, one per lane: lane_key[l] is the key issued l
// cycles ago, and the caller uses it as the read address of bank l of the
// partial-sum and coefficient memories. Their data come back one cycle later
// on ps[l] and beta[l]. The adder chain starts from 0 and has one register
// per adder:
//     s[0] <- 0      + ps[0]*beta[0]     (= the product itself)
//     s[l] <- s[l-1] + ps[l]*beta[l]
// so the products of one group meet their running sum exactly, and are
// added in lane order 0, 1, ..., F-1. out_sum = that sum leaves with
// out_valid and out_key F+1 cycles after issue; initiation interval 1.
//
// The multiplier column, the zero at the head of the chain, the chain
// pipelining and the single-precision arithmetic follow the reference
// design. One adder per pipeline stage (the reference design spends several
// cycles per floating-point add) and aligning the lanes by delaying the read
// addresses instead of delaying data are this design's choices.
module cascaded_mac_array #(
  parameter int unsigned F     = svr_pkg::F_DEF,
  parameter int unsigned KEY_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              issue_valid,
  input  logic [KEY_W-1:0]  issue_key,
  // per-lane read addressing (skewed) and returned data
  output logic              lane_valid [F],
  output logic [KEY_W-1:0]  lane_key   [F],
  input  svr_pkg::fp32_t    ps   [F],
  input  svr_pkg::fp32_t    beta [F],
  // one result per group
  output logic              out_valid,
  output logic [KEY_W-1:0]  out_key,
  output svr_pkg::fp32_t    out_sum
);
  import svr_pkg::*;

  logic             kv  [F];   // key chain valid, lanes 1..F-1 registered
  logic [KEY_W-1:0] kk  [F];
  logic             sv  [F];   // adder-chain stage valid
  logic [KEY_W-1:0] sk  [F];   // adder-chain stage key
  fp32_t            s   [F];   // adder-chain running sums
  logic             dv0;       // lane 0 data valid (one cycle after issue)
  logic [KEY_W-1:0] dk0;

  assign kv[0] = issue_valid;
  assign kk[0] = issue_key;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 1; l < F; l++) kv[l] <= 1'b0;
      dv0 <= 1'b0;
      for (int l = 0; l < F; l++) sv[l] <= 1'b0;
    end else begin
      for (int l = 1; l < F; l++) kv[l] <= kv[l-1];
      // s[l] holds the group issued on lane l two cycles earlier: one
      // cycle of memory read, one of adding
      dv0   <= kv[0];
      sv[0] <= dv0;
      for (int l = 1; l < F; l++) sv[l] <= sv[l-1];
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 1; l < F; l++) kk[l] <= kk[l-1];
    dk0   <= kk[0];
    sk[0] <= dk0;
    for (int l = 1; l < F; l++) sk[l] <= sk[l-1];
  end

  for (genvar l = 0; l < F; l++) begin : g_lane
    fp32_t prod;
    fp32_mul u_mul (.a(ps[l]), .b(beta[l]), .y(prod));
    if (l == 0) begin : g_head
      always_ff @(posedge clk) s[0] <= prod;
    end else begin : g_link
      fp32_t nxt;
      fp32_add u_add (.a(s[l-1]), .b(prod), .y(nxt));
      always_ff @(posedge clk) s[l] <= nxt;
    end
    assign lane_valid[l] = kv[l];
    assign lane_key[l]   = kk[l];
  end

  assign out_valid = sv[F-1];
  assign out_key   = sk[F-1];
  assign out_sum   = s[F-1];
endmodule
