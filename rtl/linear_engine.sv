// linear_engine: unified, runtime-parameterizable W4A8 linear engine with
// LUT-based APoT arithmetic (paper Sec. IV-V, Fig. 3).
//
// Computes Y[token] = act(dequant(X_q[token] * W) + bias) for a K x N layer
// with 4-bit APoT weights in per-block (32 inputs) scaling and INT8 dynamic
// per-token activations. K = cfg_ktiles*T and N = cfg_ntiles*T are set at run
// time, so one engine serves every projection of every model size.
// Pipeline (one T x T tile per cycle in the steady state):
//   act_quantizer   per-token absmax, INT8 mapping, scale to a scale FIFO
//   lut_precompute  8 pre-shifted APoT products per input, once per tile,
//                   replayed with control packets (n outer, k inner)
//   LUT FIFO        decouples pre-computation from the PE array
//   weight buffer   on-chip, re-ordered tiles read at a sequential address
//   T lut_pe_lane   mux + sign inverter + adder tree + block accumulator
//   weight_scale_accum  per-block weight scale, row accumulation over K
//   dequant_postproc    token scale, >>F, bias, ReLU/SiLU/SoftPlus
// Loading: weight tiles through weight_burst_loader (256-bit beats, T*T*4-bit
// words, tile order n-major then k), block scales and biases through simple
// write ports. Scale word address = n*(ktiles/2 rounded up) + block, one
// 16-bit scale per lane. Output: one 1 x T tile per output group, in group
// order, with out_last on the token's last tile.
// Capacity defaults cover the largest ViM-b projection (768 -> 3072 and
// 1536 -> 768); the paper gives no buffer sizes.
// Backpressure: every stage after the LUT FIFO advances on one enable, which
// drops while an output tile waits on out_ready.
// Lint note: the tool reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the 'disable iff (!rst_n)' of
// the simulation assertion below, so no flop mixes reset styles.
// wbeat_ready is constant high (the burst loader never stalls); the port is
// kept so that a DMA master sees an ordinary valid/ready stream.
module linear_engine
  import vimq_pkg::*;
#(
  parameter int unsigned LANES  = vimq_pkg::T,
  parameter int unsigned MAX_K  = 1536,
  parameter int unsigned MAX_N  = 3072,
  parameter int unsigned WDEPTH = 9216,
  parameter int unsigned BLK_TILES = vimq_pkg::QBLK / vimq_pkg::T
) (
  input  logic        clk,
  input  logic        rst_n,
  // run-time configuration
  input  logic [7:0]  cfg_ktiles,
  input  logic [9:0]  cfg_ntiles,
  input  act_fn_e     cfg_act,
  input  logic        cfg_bias_en,
  // parameter loading
  input  logic        wload_start,
  input  logic        wbeat_valid,
  output logic        wbeat_ready,
  input  logic [255:0] wbeat_data,
  input  logic        sc_we,
  input  logic [$clog2(WDEPTH/BLK_TILES)-1:0] sc_addr,
  input  wscale_t     sc_data [LANES],
  input  logic        bias_we,
  input  logic [$clog2(MAX_N/LANES)-1:0] bias_addr,
  input  act_t        bias_data [LANES],
  // activation stream
  input  logic        in_valid,
  output logic        in_ready,
  input  act_t        in_data [LANES],
  output logic        out_valid,
  input  logic        out_ready,
  output act_t        out_data [LANES],
  output logic [9:0]  out_grp,
  output logic        out_last,
  // observation
  output logic        stat_replay_stall,   // quantizer output held by LUT replay
  output logic        stat_fifo_full       // LUT FIFO full
);
  localparam int unsigned WORD_W = LANES * LANES * 4;
  localparam int unsigned SDEPTH = WDEPTH / BLK_TILES;
  localparam int unsigned LUTSET_W = LANES * 8 * LUT_W;
  localparam int unsigned PKT_W = LUTSET_W + $bits(ctrl_pkt_t);
  localparam int unsigned SUM_W = 26;
  localparam int unsigned ACC_W = 48;

  // ---------------- on-chip parameter buffers ----------------
  logic [WORD_W-1:0] wbuf [WDEPTH];
  wscale_t           sbuf [SDEPTH][LANES];
  act_t              bbuf [MAX_N/LANES][LANES];

  logic              lw_en;
  logic [$clog2(WDEPTH)-1:0] lw_addr;
  logic [WORD_W-1:0] lw_data;
  weight_burst_loader #(.BEAT_W(256), .WORD_W(WORD_W), .DEPTH(WDEPTH)) u_loader (
    .clk, .rst_n, .start(wload_start), .beat_valid(wbeat_valid), .beat_ready(wbeat_ready),
    .beat_data(wbeat_data), .wr_en(lw_en), .wr_addr(lw_addr), .wr_data(lw_data));

  always_ff @(posedge clk) begin
    if (lw_en)   wbuf[lw_addr] <= lw_data;
    if (sc_we)   sbuf[sc_addr] <= sc_data;
    if (bias_we) bbuf[bias_addr] <= bias_data;
  end

  // ---------------- dynamic activation quantizer ----------------
  logic q_valid, q_ready, q_first, q_last;
  q_t   q_data [LANES];
  logic [15:0] q_absmax;
  logic sf_in_ready, sf_out_valid, sf_pop;
  logic [15:0] sf_absmax;
  logic p_in_ready;
  logic [$clog2(5)-1:0] sf_count;

  act_quantizer #(.LANES(LANES), .MAX_K(MAX_K)) u_quant (
    .clk, .rst_n, .cfg_ktiles, .in_valid, .in_ready, .in_data,
    .out_valid(q_valid), .out_ready(q_ready), .out_q(q_data), .out_absmax(q_absmax),
    .out_first(q_first), .out_last(q_last));

  assign q_ready = p_in_ready && (!q_first || sf_in_ready);
  assign stat_replay_stall = q_valid && !p_in_ready;

  // per-token scale FIFO towards the dequantizer
  sync_fifo #(.W(16), .DEPTH(4)) u_scale_fifo (
    .clk, .rst_n, .in_valid(q_valid && q_ready && q_first), .in_ready(sf_in_ready),
    .in_data(q_absmax), .out_valid(sf_out_valid), .out_ready(sf_pop), .out_data(sf_absmax),
    .count(sf_count));

  // ---------------- LUT pre-computation ----------------
  logic      p_valid, p_ready;
  lut_t      p_lut [LANES][8];
  ctrl_pkt_t p_ctrl;
  lut_precompute #(.LANES(LANES), .MAX_K(MAX_K), .BLK_TILES(BLK_TILES)) u_pre (
    .clk, .rst_n, .cfg_ktiles, .cfg_ntiles,
    .in_valid(q_valid && (!q_first || sf_in_ready)), .in_ready(p_in_ready), .in_q(q_data), .in_last(q_last),
    .out_valid(p_valid), .out_ready(p_ready), .out_lut(p_lut), .out_ctrl(p_ctrl));

  // ---------------- LUT and control packet FIFO ----------------
  logic [PKT_W-1:0] pkt_in, pkt_out;
  logic f_valid, f_pop;
  always_comb begin
    for (int i = 0; i < int'(LANES); i++)
      for (int j = 0; j < 8; j++)
        pkt_in[(i*8+j)*LUT_W +: LUT_W] = p_lut[i][j];
    pkt_in[PKT_W-1 -: $bits(ctrl_pkt_t)] = p_ctrl;
  end
  logic [$clog2(5)-1:0] f_count;
  ctrl_pkt_t f_ctrl;
  assign f_ctrl = ctrl_pkt_t'(pkt_out[PKT_W-1 -: $bits(ctrl_pkt_t)]);
  sync_fifo #(.W(PKT_W), .DEPTH(4)) u_lut_fifo (
    .clk, .rst_n, .in_valid(p_valid), .in_ready(p_ready), .in_data(pkt_in),
    .out_valid(f_valid), .out_ready(f_pop), .out_data(pkt_out), .count(f_count));
  assign stat_fifo_full = !p_ready;

  // ---------------- core pipeline ----------------
  logic en;
  assign en    = !out_valid || out_ready;
  assign f_pop = f_valid && en;

  // S0: registered LUT set, control packet and weight tile (sequential address)
  logic      v0;
  lut_t      lut0 [LANES][8];
  ctrl_pkt_t ctrl0;
  logic [WORD_W-1:0] wt0;
  logic [$clog2(WDEPTH)-1:0] wptr;
  always_ff @(posedge clk) begin
    if (f_pop) wt0 <= wbuf[wptr];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; ctrl0 <= '0; wptr <= '0;
      for (int i = 0; i < int'(LANES); i++)
        for (int j = 0; j < 8; j++) lut0[i][j] <= '0;
    end else if (en) begin
      v0 <= f_valid;
      if (f_valid) begin
        ctrl0 <= f_ctrl;
        for (int i = 0; i < int'(LANES); i++)
          for (int j = 0; j < 8; j++) lut0[i][j] <= lut_t'(pkt_out[(i*8+j)*LUT_W +: LUT_W]);
        wptr <= f_ctrl.tok_last ? '0 : wptr + 1'b1;
      end
    end
  end

  // S1: PE lanes, one per output channel of the group
  logic pe_valid [LANES];
  logic signed [SUM_W-1:0] pe_sum [LANES];
  ctrl_pkt_t pe_ctrl [LANES];
  for (genvar g = 0; g < int'(LANES); g++) begin : g_lane
    w4_t wl [LANES];
    always_comb
      for (int i = 0; i < int'(LANES); i++) wl[i] = wt0[(g*LANES + i)*4 +: 4];
    lut_pe_lane #(.LANES(LANES), .SUM_W(SUM_W)) u_pe (
      .clk, .rst_n, .en, .in_valid(v0), .in_lut(lut0), .in_w(wl), .in_ctrl(ctrl0),
      .out_valid(pe_valid[g]), .out_sum(pe_sum[g]), .out_ctrl(pe_ctrl[g]));
  end

  // S2: block scaling and row accumulation
  logic [$clog2(SDEPTH)-1:0] sptr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sptr <= '0;
    else if (en && pe_valid[0]) sptr <= pe_ctrl[0].tok_last ? '0 : sptr + 1'b1;
  end
  logic ws_valid;
  logic signed [ACC_W-1:0] ws_acc [LANES];
  ctrl_pkt_t ws_ctrl;
  weight_scale_accum #(.LANES(LANES), .SUM_W(SUM_W), .ACC_W(ACC_W)) u_wsa (
    .clk, .rst_n, .en, .in_valid(pe_valid[0]), .in_sum(pe_sum), .in_scale(sbuf[sptr]),
    .in_ctrl(pe_ctrl[0]), .out_valid(ws_valid), .out_acc(ws_acc), .out_ctrl(ws_ctrl));

  // S3: dequantization and post-processing
  assign sf_pop = en && ws_valid && ws_ctrl.tok_last;
  ctrl_pkt_t dq_ctrl;
  dequant_postproc #(.LANES(LANES), .ACC_W(ACC_W)) u_dq (
    .clk, .rst_n, .en, .cfg_act, .cfg_bias_en, .in_valid(ws_valid), .in_acc(ws_acc),
    .in_absmax(sf_absmax), .in_bias(bbuf[ws_ctrl.out_grp[$clog2(MAX_N/LANES)-1:0]]), .in_ctrl(ws_ctrl),
    .out_valid(out_valid), .out_y(out_data), .out_ctrl(dq_ctrl));

  assign out_grp  = dq_ctrl.out_grp;
  assign out_last = dq_ctrl.tok_last;

  // the token's scale must be waiting when its first row reaches the dequantizer
  assert property (@(posedge clk) disable iff (!rst_n) (en && ws_valid) |-> sf_out_valid);
endmodule
