// parallel_mac_array: the F-lane MAC array that builds the partial-sum matrix
// (loops L1-L3 of the batch algorithm, L3 unrolled by F), in IEEE single
// precision.
//
// Every cycle in which issue_valid is high the controller has addressed the
// memories for one (k, i, c): SV row i / tile c, input element x[k][i] and
// partial-sum word (k, c) at issue_addr. One cycle later the data arrive and
// each lane l computes, with one fp32_mul and one fp32_add,
//     ps[k][c*F+l] <- (first ? +0 : ps[k][c*F+l]) + SV[i][c*F+l] * x[k][i]
// and writes it back through wr_en/wr_addr/wr_data in that same cycle (the
// write lands on the next clock edge). first is high for i == 0, which
// replaces a separate clearing pass of the partial-sum RAM; adding to +0
// returns the product unchanged.
//
// Consecutive accesses to one address are NSF cycles apart. With NSF == 1
// they are back to back, and the RAM (read-first) would return the word that
// is being written in the same cycle; a one-entry bypass register then feeds
// the last written tile row back instead, and fwd reports it. Timing: one
// cycle from issue to write-back, initiation interval 1; the multiply and
// add are combinational within that cycle (the reference design pipelines
// its floating-point adder over several cycles, which the interchanged loop
// order tolerates because an address recurs only every NSF cycles).
//
// The lane structure, the single-precision arithmetic and the dual-port
// read-modify-write follow the reference design; the single-cycle arithmetic
// and the bypass are this design's choices.
module parallel_mac_array #(
  parameter int unsigned F  = svr_pkg::F_DEF,
  parameter int unsigned AW = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // cycle of memory addressing
  input  logic                 issue_valid,
  input  logic                 issue_first,
  input  logic [AW-1:0]        issue_addr,
  // data, one cycle after issue
  input  svr_pkg::fp32_t       sv    [F],
  input  svr_pkg::fp32_t       x,
  input  svr_pkg::fp32_t       ps_rd [F],
  // write-back to the partial-sum RAM
  output logic                 wr_en,
  output logic [AW-1:0]        wr_addr,
  output svr_pkg::fp32_t       wr_data [F],
  output logic                 fwd
);
  import svr_pkg::*;

  logic          s2_valid, s2_first;
  logic [AW-1:0] s2_addr;
  logic          last_valid;
  logic [AW-1:0] last_addr;
  fp32_t         last_data [F];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid   <= 1'b0;
      s2_first   <= 1'b0;
      s2_addr    <= '0;
      last_valid <= 1'b0;
      last_addr  <= '0;
    end else begin
      s2_valid   <= issue_valid;
      s2_first   <= issue_first;
      s2_addr    <= issue_addr;
      last_valid <= wr_en;
      last_addr  <= wr_addr;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) last_data <= wr_data;
  end

  // the word read from the RAM is stale if it was written on this very edge
  assign fwd     = s2_valid && !s2_first && last_valid && (last_addr == s2_addr);
  assign wr_en   = s2_valid;
  assign wr_addr = s2_addr;

  for (genvar l = 0; l < F; l++) begin : g_lane
    fp32_t prod, acc;
    fp32_mul u_mul (.a(sv[l]), .b(x), .y(prod));
    always_comb begin
      if (s2_first) acc = '0;
      else if (fwd) acc = last_data[l];
      else          acc = ps_rd[l];
    end
    fp32_add u_add (.a(acc), .b(prod), .y(wr_data[l]));
  end
endmodule
