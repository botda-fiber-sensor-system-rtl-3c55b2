// svr_ctrl: sequencer for one batch of the linear-SVR decision function.
//
// On start (while idle) it latches n_batch (1..B vectors) and walks the loop
// nest of the batch algorithm:
//   PH_PSUM   for k < n_batch, i < M, c < NSF: one p_* issue per cycle
//             (c innermost, so the F lanes of the parallel MAC array cover
//             tile c of SV row i); p_first marks i == 0
//   PH_DRAIN1 one cycle, for the last partial-sum write-back
//   PH_FSUM   for k < n_batch, c < NSF: one f_* issue per cycle into the
//             cascaded MAC array
//   PH_DRAIN2 F+1 cycles, until the last adder-chain result is stored
//   PH_TREE   for k < n_batch: one t_* issue per cycle into the adder tree
//   PH_DONE   one cycle; done is high, aligned with the last result
// so that done follows the start cycle by
//   n_batch*M*NSF + n_batch*NSF + n_batch + F + 3 cycles.
// start is ignored while busy. The loop nest and its order are the
// reference design's; the run-time batch length, the drain phases and their
// lengths are this design's choices, set by the pipeline depths of the MAC
// arrays.
module svr_ctrl #(
  parameter int unsigned B   = svr_pkg::B_DEF,
  parameter int unsigned M   = svr_pkg::M_DEF,
  parameter int unsigned NSF = svr_pkg::NS_DEF / svr_pkg::F_DEF,
  parameter int unsigned F   = svr_pkg::F_DEF,
  localparam int unsigned KW = (B   > 1) ? $clog2(B)   : 1,
  localparam int unsigned IW = (M   > 1) ? $clog2(M)   : 1,
  localparam int unsigned TW = (NSF > 1) ? $clog2(NSF) : 1,
  localparam int unsigned NW = $clog2(B + 1),
  localparam int unsigned DW = $clog2(F + 2)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [NW-1:0]  n_batch,
  output logic           busy,
  output logic           done,
  output svr_pkg::phase_e phase,
  // partial-sum issue
  output logic           p_valid,
  output logic           p_first,
  output logic [KW-1:0]  p_k,
  output logic [IW-1:0]  p_i,
  output logic [TW-1:0]  p_c,
  // final-sum issue
  output logic           f_valid,
  output logic [KW-1:0]  f_k,
  output logic [TW-1:0]  f_c,
  // adder-tree issue
  output logic           t_valid,
  output logic [KW-1:0]  t_k
);
  import svr_pkg::*;

  phase_e        ph;
  logic [KW-1:0] k;
  logic [IW-1:0] i;
  logic [TW-1:0] c;
  logic [KW-1:0] k_last;
  logic [DW-1:0] wait_cnt;

  logic c_wrap, i_wrap, k_wrap;
  assign c_wrap = (c == TW'(NSF - 1));
  assign i_wrap = (i == IW'(M - 1));
  assign k_wrap = (k == k_last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph       <= PH_IDLE;
      k        <= '0;
      i        <= '0;
      c        <= '0;
      k_last   <= '0;
      wait_cnt <= '0;
    end else begin
      unique case (ph)
        PH_IDLE: begin
          if (start && n_batch != '0) begin
            ph     <= PH_PSUM;
            k_last <= KW'(n_batch - NW'(1));
            k <= '0; i <= '0; c <= '0;
          end
        end
        PH_PSUM: begin
          c <= c_wrap ? '0 : c + TW'(1);
          if (c_wrap) begin
            i <= i_wrap ? '0 : i + IW'(1);
            if (i_wrap) begin
              k <= k_wrap ? '0 : k + KW'(1);
              if (k_wrap) ph <= PH_DRAIN1;
            end
          end
        end
        PH_DRAIN1: ph <= PH_FSUM;
        PH_FSUM: begin
          c <= c_wrap ? '0 : c + TW'(1);
          if (c_wrap) begin
            k <= k_wrap ? '0 : k + KW'(1);
            if (k_wrap) begin
              ph       <= PH_DRAIN2;
              wait_cnt <= '0;
            end
          end
        end
        PH_DRAIN2: begin
          wait_cnt <= wait_cnt + DW'(1);
          if (wait_cnt == DW'(F)) ph <= PH_TREE;
        end
        PH_TREE: begin
          k <= k_wrap ? '0 : k + KW'(1);
          if (k_wrap) ph <= PH_DONE;
        end
        PH_DONE: ph <= PH_IDLE;
        default: ph <= PH_IDLE;
      endcase
    end
  end

  assign phase   = ph;
  assign busy    = (ph != PH_IDLE);
  assign done    = (ph == PH_DONE);
  assign p_valid = (ph == PH_PSUM);
  assign p_first = (i == '0);
  assign p_k     = k;
  assign p_i     = i;
  assign p_c     = c;
  assign f_valid = (ph == PH_FSUM);
  assign f_k     = k;
  assign f_c     = c;
  assign t_valid = (ph == PH_TREE);
  assign t_k     = k;
endmodule
