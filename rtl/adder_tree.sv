// adder_tree: binary tree of single-precision adders that reduces one row of
// the auxiliary matrix (N = NS/F entries) and adds the intercept b, giving
// one final regression value f(x[k]) per cycle.
//
// The N inputs are padded with +0 to the next power of two and summed
// pairwise over clog2(N) combinational levels (node 2n with node 2n+1; for
// N = 4: (in0 + in1) + (in2 + in3)); the bias is added to the root, and the result and its tag
// (the batch index k) are registered, so out_* follow in_* by one cycle.
// Adding the bias at the root is equivalent to the f_sum <- bias
// initialisation of the batch algorithm up to rounding order. The tree and
// the arithmetic are the reference design's; the single output register and
// the order of additions are this design's choices.
module adder_tree #(
  parameter int unsigned N     = svr_pkg::NS_DEF / svr_pkg::F_DEF,
  parameter int unsigned TAG_W = 6,
  localparam int unsigned LV   = (N > 1) ? $clog2(N) : 0,
  localparam int unsigned P2   = 1 << LV
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  svr_pkg::fp32_t   in [N],
  input  svr_pkg::fp32_t   bias,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output svr_pkg::fp32_t   out_sum
);
  import svr_pkg::*;

  fp32_t row_sum, root;

  // level v holds P2 >> v partial sums; level 0 is the row padded with +0
  for (genvar v = 0; v <= LV; v++) begin : g_lv
    fp32_t node [P2 >> v];
    for (genvar n = 0; n < (P2 >> v); n++) begin : g_node
      if (v == 0) begin : g_leaf
        if (n < N) begin : g_in
          assign node[n] = in[n];
        end else begin : g_pad
          assign node[n] = '0;
        end
      end else begin : g_add
        fp32_add u_add (.a(g_lv[v-1].node[2*n]), .b(g_lv[v-1].node[2*n+1]), .y(node[n]));
      end
    end
  end

  assign row_sum = g_lv[LV].node[0];

  fp32_add u_bias (.a(row_sum), .b(bias), .y(root));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    out_tag <= in_tag;
    out_sum <= root;
  end
endmodule
