// vimq_top: the ViM-Q style Vision Mamba accelerator: all compute engines,
// their on-chip parameter buffers and the tile-stream interconnect.
//
// Engines (paper Sec. IV): the unified W4A8 linear engine, the pipelined
// selective-SSM engine, and the auxiliary engines for causal convolution,
// residual + RMS normalization, activation smoothing, patch operations (flip,
// class-token extraction) and patch-embedding token assembly. Every engine is
// configured at run time (tile counts, sequence length, activation function),
// so one build serves ViM-t/s/b at any input resolution up to the buffer
// capacities below.
// The tile engines (1 x T tiles of Q8.8 values) hang on stream_switch:
// cfg_route[sink] selects the source of every sink, with source/sink numbers
//   sources: 0 ext_in, 1 linear, 2 conv, 3 norm, 4 smoothing, 5 patch_ops, 6 patch_embed
//   sinks:   0 linear, 1 conv, 2 norm, 3 smoothing, 4 patch_ops, 5 patch_embed, 6 ext_out
// ext_in / ext_out stand for the DMA (AXI burst) channels to off-chip memory,
// which the host processor programs; neither the host nor the DMA is part of
// this design. The SSM engine consumes per-channel scalars (delta, u, z) and a
// per-token B/C packet, so it has its own ports (also fed by DMA). The norm
// engine's residual input and output travel beside its tile streams.
// The paper does not publish its top-level wiring; the switch and port set
// are this design's. Capacities (parameters) are this design's choices
// covering the largest ViM-b layer where the paper gives no number.
// Lint note: the reset is reported as used both asynchronously and
// synchronously; the synchronous uses are the 'disable iff' clauses of the
// engines' simulation assertions only. lin_out_grp is left unconnected: the
// tile order is fixed, so downstream engines do not need it. lin_wbeat_ready
// is constant high: the weight loader accepts a beat every cycle.
module vimq_top
  import vimq_pkg::*;
#(
  parameter int unsigned LANES      = vimq_pkg::T,
  parameter int unsigned LIN_MAX_K  = 1536,
  parameter int unsigned LIN_MAX_N  = 3072,
  parameter int unsigned LIN_WDEPTH = 9216,
  parameter int unsigned SSM_NB     = 16,
  parameter int unsigned SSM_MAX_D  = 1536,
  parameter int unsigned CONV_MAX_D = 1536,
  parameter int unsigned NORM_MAX_D = 768,
  parameter int unsigned SEQ_MAX    = 257,
  parameter int unsigned SEQ_MAX_CH = 768
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [2:0]  cfg_route [7],
  // external tile streams (DMA)
  input  logic        ext_in_valid,
  output logic        ext_in_ready,
  input  act_t        ext_in_data [LANES],
  input  logic        ext_in_last,
  output logic        ext_out_valid,
  input  logic        ext_out_ready,
  output act_t        ext_out_data [LANES],
  output logic        ext_out_last,
  // linear engine
  input  logic [7:0]  lin_ktiles,
  input  logic [9:0]  lin_ntiles,
  input  act_fn_e     lin_act,
  input  logic        lin_bias_en,
  input  logic        lin_wload_start,
  input  logic        lin_wbeat_valid,
  output logic        lin_wbeat_ready,
  input  logic [255:0] lin_wbeat_data,
  input  logic        lin_sc_we,
  input  logic [$clog2(LIN_WDEPTH/2)-1:0] lin_sc_addr,
  input  wscale_t     lin_sc_data [LANES],
  input  logic        lin_bias_we,
  input  logic [$clog2(LIN_MAX_N/LANES)-1:0] lin_bias_addr,
  input  act_t        lin_bias_data [LANES],
  output logic        lin_stat_replay_stall,
  output logic        lin_stat_fifo_full,
  // causal convolution
  input  logic [7:0]  conv_ctiles,
  input  logic        conv_seq_first,
  input  logic        conv_wp_we,
  input  logic [$clog2(CONV_MAX_D/LANES)-1:0] conv_wp_addr,
  input  w4_t         conv_wp_w [LANES][4],
  input  wscale_t     conv_wp_scale [LANES],
  input  act_t        conv_wp_bias [LANES],
  // residual + norm
  input  logic [7:0]  norm_ctiles,
  input  logic        norm_res_en,
  input  logic        norm_g_we,
  input  logic [$clog2(NORM_MAX_D/LANES)-1:0] norm_g_addr,
  input  act_t        norm_g_data [LANES],
  input  act_t        norm_res_in [LANES],
  output act_t        norm_res_out [LANES],
  // smoothing
  input  logic [7:0]  sm_ctiles,
  input  logic        sm_we,
  input  logic [$clog2(LIN_MAX_K/LANES)-1:0] sm_addr,
  input  wscale_t     sm_data [LANES],
  // patch operations
  input  logic [1:0]  po_mode,
  input  logic [8:0]  po_len,
  input  logic [8:0]  po_cls_pos,
  input  logic [7:0]  po_ctiles,
  // patch embedding token assembly
  input  logic [8:0]  pe_len,
  input  logic [8:0]  pe_cls_pos,
  input  logic [7:0]  pe_ctiles,
  input  logic        pe_we,
  input  logic [$clog2((SEQ_MAX+1)*(NORM_MAX_D/LANES))-1:0] pe_addr,
  input  act_t        pe_data [LANES],
  // SSM engine
  input  logic [15:0] ssm_d,
  input  logic [3:0]  ssm_nblk,
  input  logic        ssm_a_we,
  input  logic [$clog2(SSM_MAX_D)-1:0] ssm_a_addr,
  input  act_t        ssm_a_data [SSM_NB],
  input  logic        ssm_d_we,
  input  logic [$clog2(SSM_MAX_D)-1:0] ssm_d_addr,
  input  act_t        ssm_d_data,
  input  logic        ssm_bc_valid,
  output logic        ssm_bc_ready,
  input  logic        ssm_bc_seq_first,
  input  act_t        ssm_bc_b [1][SSM_NB],
  input  act_t        ssm_bc_c [1][SSM_NB],
  input  logic        ssm_in_valid,
  output logic        ssm_in_ready,
  input  act_t        ssm_in_delta,
  input  act_t        ssm_in_u,
  input  act_t        ssm_in_z,
  output logic        ssm_out_valid,
  input  logic        ssm_out_ready,
  output act_t        ssm_out_data,
  output logic        ssm_out_last
);
  localparam int unsigned NS = 7;
  logic src_valid [NS], src_ready [NS], src_last [NS];
  act_t src_data  [NS][LANES];
  logic snk_valid [NS], snk_ready [NS], snk_last [NS];
  act_t snk_data  [NS][LANES];

  stream_switch #(.LANES(LANES), .NSRC(NS), .NSNK(NS)) u_switch (
    .clk, .rst_n, .cfg_route, .src_valid, .src_ready, .src_data, .src_last,
    .snk_valid, .snk_ready, .snk_data, .snk_last);

  // source 0 / sink 6: external streams
  assign src_valid[0] = ext_in_valid;
  assign ext_in_ready = src_ready[0];
  assign src_data[0]  = ext_in_data;
  assign src_last[0]  = ext_in_last;
  assign ext_out_valid = snk_valid[6];
  assign snk_ready[6]  = ext_out_ready;
  assign ext_out_data  = snk_data[6];
  assign ext_out_last  = snk_last[6];

  // ---------------- unified linear engine ----------------
  logic [9:0] lin_out_grp;
  linear_engine #(.LANES(LANES), .MAX_K(LIN_MAX_K), .MAX_N(LIN_MAX_N), .WDEPTH(LIN_WDEPTH)) u_linear (
    .clk, .rst_n, .cfg_ktiles(lin_ktiles), .cfg_ntiles(lin_ntiles), .cfg_act(lin_act), .cfg_bias_en(lin_bias_en),
    .wload_start(lin_wload_start), .wbeat_valid(lin_wbeat_valid), .wbeat_ready(lin_wbeat_ready),
    .wbeat_data(lin_wbeat_data), .sc_we(lin_sc_we), .sc_addr(lin_sc_addr), .sc_data(lin_sc_data),
    .bias_we(lin_bias_we), .bias_addr(lin_bias_addr), .bias_data(lin_bias_data),
    .in_valid(snk_valid[0]), .in_ready(snk_ready[0]), .in_data(snk_data[0]),
    .out_valid(src_valid[1]), .out_ready(src_ready[1]), .out_data(src_data[1]),
    .out_grp(lin_out_grp), .out_last(src_last[1]),
    .stat_replay_stall(lin_stat_replay_stall), .stat_fifo_full(lin_stat_fifo_full));

  // ---------------- causal conv1d ----------------
  causal_conv1d #(.LANES(LANES), .MAX_D(CONV_MAX_D), .KS(4)) u_conv (
    .clk, .rst_n, .cfg_ctiles(conv_ctiles), .wp_we(conv_wp_we), .wp_addr(conv_wp_addr),
    .wp_w(conv_wp_w), .wp_scale(conv_wp_scale), .wp_bias(conv_wp_bias),
    .in_valid(snk_valid[1]), .in_ready(snk_ready[1]), .in_data(snk_data[1]), .in_seq_first(conv_seq_first),
    .out_valid(src_valid[2]), .out_ready(src_ready[2]), .out_data(src_data[2]), .out_last(src_last[2]));

  // ---------------- residual + RMS norm ----------------
  norm_residual #(.LANES(LANES), .MAX_D(NORM_MAX_D)) u_norm (
    .clk, .rst_n, .cfg_ctiles(norm_ctiles), .cfg_res_en(norm_res_en),
    .g_we(norm_g_we), .g_addr(norm_g_addr), .g_data(norm_g_data),
    .in_valid(snk_valid[2]), .in_ready(snk_ready[2]), .in_x(snk_data[2]), .in_r(norm_res_in),
    .out_valid(src_valid[3]), .out_ready(src_ready[3]), .out_norm(src_data[3]), .out_res(norm_res_out),
    .out_last(src_last[3]));

  // ---------------- smoothing ----------------
  layer_smoothing #(.LANES(LANES), .MAX_D(LIN_MAX_K)) u_smooth (
    .clk, .rst_n, .cfg_ctiles(sm_ctiles), .s_we(sm_we), .s_addr(sm_addr), .s_data(sm_data),
    .in_valid(snk_valid[3]), .in_ready(snk_ready[3]), .in_data(snk_data[3]),
    .out_valid(src_valid[4]), .out_ready(src_ready[4]), .out_data(src_data[4]), .out_last(src_last[4]));

  // ---------------- patch operations ----------------
  patch_ops #(.LANES(LANES), .MAX_TOK(SEQ_MAX), .MAX_CH(SEQ_MAX_CH)) u_patch_ops (
    .clk, .rst_n, .cfg_mode(po_mode), .cfg_len(po_len), .cfg_cls_pos(po_cls_pos), .cfg_ctiles(po_ctiles),
    .in_valid(snk_valid[4]), .in_ready(snk_ready[4]), .in_data(snk_data[4]),
    .out_valid(src_valid[5]), .out_ready(src_ready[5]), .out_data(src_data[5]), .out_last(src_last[5]));

  // ---------------- patch embedding token assembly ----------------
  patch_embed #(.LANES(LANES), .MAX_TOK(SEQ_MAX), .MAX_D(NORM_MAX_D)) u_patch_embed (
    .clk, .rst_n, .cfg_len(pe_len), .cfg_cls_pos(pe_cls_pos), .cfg_ctiles(pe_ctiles),
    .pe_we, .pe_addr, .pe_data,
    .in_valid(snk_valid[5]), .in_ready(snk_ready[5]), .in_data(snk_data[5]),
    .out_valid(src_valid[6]), .out_ready(src_ready[6]), .out_data(src_data[6]), .out_last(src_last[6]));

  // ---------------- selective SSM ----------------
  ssm_engine #(.NB(SSM_NB), .MAX_D(SSM_MAX_D), .MAX_NBLK(1)) u_ssm (
    .clk, .rst_n, .cfg_d(ssm_d), .cfg_nblk(ssm_nblk),
    .a_we(ssm_a_we), .a_addr(ssm_a_addr), .a_data(ssm_a_data),
    .d_we(ssm_d_we), .d_addr(ssm_d_addr), .d_data(ssm_d_data),
    .bc_valid(ssm_bc_valid), .bc_ready(ssm_bc_ready), .bc_seq_first(ssm_bc_seq_first),
    .bc_b(ssm_bc_b), .bc_c(ssm_bc_c),
    .in_valid(ssm_in_valid), .in_ready(ssm_in_ready), .in_delta(ssm_in_delta), .in_u(ssm_in_u), .in_z(ssm_in_z),
    .out_valid(ssm_out_valid), .out_ready(ssm_out_ready), .out_data(ssm_out_data), .out_last(ssm_out_last));
endmodule
