// svr_accel: batch accelerator for the linear support-vector-regression
// decision function used to turn measured Brillouin gain spectra (BGS) into
// temperatures,
//     y[k] = sum_{j<NS} beta[j] * ( sum_{i<M} SV[i][j] * x[k][i] ) + b,
// for a batch of up to B feature vectors x[k] at a time.
//
// The computation is split into a matrix-matrix product (partial sums
// PS = X * SV, done by the F-lane parallel MAC array into the partitioned
// dual-port partial-sum RAM) and a matrix-vector product (PS * beta, done by
// the cascaded MAC array with its pipelined adder chain into the auxiliary
// matrix, then reduced row by row with the bias by the adder tree). All the
// memories are split cyclically into F banks so that F support vectors or
// coefficients are read per cycle.
//
// Host interface (this design's own; plain synchronous write ports): while
// busy is low, load the support vectors (SV[i][c*F+lane] via sv_row/sv_tile/
// sv_lane), the coefficients (beta[c*F+lane]), the bias and a batch x[k][i];
// then pulse start with n_batch (1..B). Results come out one per cycle as
// y_valid/y_k/y_data during the tree phase; done pulses with the last one.
// done follows start by n_batch*(M*NSF + NSF + 1) + F + 3 cycles, where
// NSF = NS/F; at the default sizes a full batch of 40 takes 35 687 cycles.
// The model (SV, beta, b) stays loaded across batches.
//
// Sizes follow the reference design (NS = 1136, M = 220, F = 284, B = 40);
// NS must be a multiple of F. All data and arithmetic are IEEE single
// precision, as in the reference design (with subnormals flushed to zero,
// see fp32_mul and fp32_add); y_data is y[k] as a single-precision word.
// The lint tool notes rst_n as used both asynchronously (flip-flop resets) and
// synchronously; the synchronous use is only the assertions' disable iff.
module svr_accel #(
  parameter int unsigned NS     = svr_pkg::NS_DEF,
  parameter int unsigned M      = svr_pkg::M_DEF,
  parameter int unsigned F      = svr_pkg::F_DEF,
  parameter int unsigned B      = svr_pkg::B_DEF,
  localparam int unsigned NSF   = NS / F,
  localparam int unsigned KW    = (B   > 1) ? $clog2(B)   : 1,
  localparam int unsigned IW    = (M   > 1) ? $clog2(M)   : 1,
  localparam int unsigned TW    = (NSF > 1) ? $clog2(NSF) : 1,
  localparam int unsigned LW    = (F   > 1) ? $clog2(F)   : 1,
  localparam int unsigned NW    = $clog2(B + 1),
  localparam int unsigned PD    = B * NSF,
  localparam int unsigned AW    = (PD > 1) ? $clog2(PD) : 1,
  localparam int unsigned FW    = svr_pkg::FP_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // model load
  input  logic              sv_we,
  input  logic [IW-1:0]     sv_row,
  input  logic [TW-1:0]     sv_tile,
  input  logic [LW-1:0]     sv_lane,
  input  logic [FW-1:0] sv_wdata,
  input  logic              beta_we,
  input  logic [TW-1:0]     beta_tile,
  input  logic [LW-1:0]     beta_lane,
  input  logic [FW-1:0] beta_wdata,
  input  logic              bias_we,
  input  logic [FW-1:0]  bias_wdata,
  // batch load
  input  logic              x_we,
  input  logic [KW-1:0]     x_k,
  input  logic [IW-1:0]     x_i,
  input  logic [FW-1:0] x_wdata,
  // control
  input  logic              start,
  input  logic [NW-1:0]     n_batch,
  output logic              busy,
  output logic              done,
  // results
  output logic              y_valid,
  output logic [KW-1:0]     y_k,
  output logic [FW-1:0]  y_data
);
  import svr_pkg::*;

  localparam int unsigned KEY_W = KW + TW + AW;

  typedef struct packed {
    logic [KW-1:0] k;
    logic [TW-1:0] c;
    logic [AW-1:0] addr;
  } fkey_t;

  // ---------------- controller ----------------
  phase_e        phase;
  logic          p_valid, p_first, f_valid, t_valid;
  logic [KW-1:0] p_k, f_k, t_k;
  logic [IW-1:0] p_i;
  logic [TW-1:0] p_c, f_c;

  svr_ctrl #(.B(B), .M(M), .NSF(NSF), .F(F)) u_ctrl (
    .clk, .rst_n, .start, .n_batch, .busy, .done, .phase,
    .p_valid, .p_first, .p_k, .p_i, .p_c,
    .f_valid, .f_k, .f_c,
    .t_valid, .t_k
  );

  logic [AW-1:0] p_addr;
  assign p_addr = AW'(p_k * NSF + p_c);

  // ---------------- memories ----------------
  logic [FW-1:0] sv_rd [F];
  logic [FW-1:0] x_rd;
  logic [FW-1:0] ps_rd [F];
  logic [FW-1:0] beta_rd [F];
  logic [AW-1:0]     ps_raddr [F];
  logic [TW-1:0]     beta_rtile [F];

  sv_matrix_mem #(.F(F), .M(M), .NSF(NSF), .W(FW)) u_sv (
    .clk, .we(sv_we), .wrow(sv_row), .wtile(sv_tile), .wlane(sv_lane),
    .wdata(sv_wdata), .rrow(p_i), .rtile(p_c), .rdata(sv_rd)
  );

  x_buffer #(.B(B), .M(M), .W(FW)) u_x (
    .clk, .we(x_we), .wk(x_k), .wi(x_i), .wdata(x_wdata),
    .rk(p_k), .ri(p_i), .rdata(x_rd)
  );

  logic              ps_we;
  logic [AW-1:0]     ps_waddr;
  logic [FW-1:0] ps_wdata [F];

  psum_ram #(.F(F), .B(B), .NSF(NSF), .W(FW)) u_ps (
    .clk, .we(ps_we), .waddr(ps_waddr), .wdata(ps_wdata),
    .raddr(ps_raddr), .rdata(ps_rd)
  );

  beta_mem #(.F(F), .NSF(NSF), .W(FW)) u_beta (
    .clk, .we(beta_we), .wtile(beta_tile), .wlane(beta_lane),
    .wdata(beta_wdata), .rtile(beta_rtile), .rdata(beta_rd)
  );

  // ---------------- partial sums: X * SV ----------------
  logic pmac_fwd;

  parallel_mac_array #(.F(F), .AW(AW)) u_pmac (
    .clk, .rst_n,
    .issue_valid(p_valid), .issue_first(p_first), .issue_addr(p_addr),
    .sv(sv_rd), .x(x_rd), .ps_rd(ps_rd),
    .wr_en(ps_we), .wr_addr(ps_waddr), .wr_data(ps_wdata), .fwd(pmac_fwd)
  );

  // ---------------- final sums: PS * beta ----------------
  fkey_t            f_key;
  logic             lane_valid [F];
  logic [KEY_W-1:0] lane_key   [F];
  logic             cm_valid;
  logic [KEY_W-1:0] cm_key;
  logic [FW-1:0] cm_sum;
  fkey_t            cm_key_s;

  assign f_key = '{k: f_k, c: f_c, addr: AW'(f_k * NSF + f_c)};

  cascaded_mac_array #(.F(F), .KEY_W(KEY_W)) u_cmac (
    .clk, .rst_n,
    .issue_valid(f_valid), .issue_key(f_key),
    .lane_valid, .lane_key,
    .ps(ps_rd), .beta(beta_rd),
    .out_valid(cm_valid), .out_key(cm_key), .out_sum(cm_sum)
  );

  // the partial-sum banks are read by the parallel MAC array in the
  // partial-sum phase and lane by lane by the cascaded array afterwards
  logic ps_owner_pmac;
  assign ps_owner_pmac = (phase == PH_PSUM) || (phase == PH_DRAIN1);

  for (genvar l = 0; l < F; l++) begin : g_lane_addr
    fkey_t lk;
    assign lk            = fkey_t'(lane_key[l]);
    assign ps_raddr[l]   = ps_owner_pmac ? p_addr : lk.addr;
    assign beta_rtile[l] = lk.c;
  end

  assign cm_key_s = fkey_t'(cm_key);

  logic [FW-1:0] am_row [NSF];

  aux_matrix #(.B(B), .NSF(NSF), .W(FW)) u_aux (
    .clk, .we(cm_valid), .wk(cm_key_s.k), .wc(cm_key_s.c), .wdata(cm_sum),
    .rk(t_k), .row(am_row)
  );

  // ---------------- adder tree with bias ----------------
  logic [FW-1:0] bias_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       bias_q <= '0;
    else if (bias_we) bias_q <= bias_wdata;
  end

  adder_tree #(.N(NSF), .TAG_W(KW)) u_tree (
    .clk, .rst_n,
    .in_valid(t_valid), .in_tag(t_k), .in(am_row), .bias(bias_q),
    .out_valid(y_valid), .out_tag(y_k), .out_sum(y_data)
  );

  // ---------------- rules of the host interface ----------------
  a_no_load_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(sv_we || beta_we || bias_we || x_we))
    else $error("model or batch written while the accelerator is busy");
  a_batch_len: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy) |-> (n_batch <= NW'(B)))
    else $error("n_batch larger than B");
endmodule
