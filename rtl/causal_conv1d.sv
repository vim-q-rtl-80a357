// causal_conv1d: depthwise causal 1-D convolution engine with dynamic
// quantization and APoT shift-add weights, followed by SiLU (paper Sec. IV
// "Auxiliary Engines", Fig. 1).
//
//   out_t[c] = SiLU( bias[c] + wscale[c] * sum_{j=0..KS-1} w[c][j] * x_{t-j}[c] )
// with x_{t-j} = 0 before the first token of a sequence (in_seq_first).
// As the paper describes, the engine reuses the linear engine's ideas: each
// token is quantized to INT8 with its own absmax (act_quantizer), weights are
// 4-bit APoT codes applied by shifts and adds, and the work is split into a
// windowing step and a filtering step:
//   windowing  per tile of T channels, a history buffer holds the INT8 values
//              and scales of the previous KS-1 tokens; the current tile is
//              appended to form the KS-tap window, and the history rewritten.
//   filtering  per channel, each tap's APoT product (pre-shifted by F) is
//              multiplied by that token's absmax (taps come from different
//              tokens with different scales), the taps are summed and the sum
//              is passed to dequant_postproc with the channel's weight scale
//              folded in, which applies /127, >>F, bias and SiLU.
// KS = 4 (the Vision Mamba default kernel; the paper gives no size), one
// weight scale per channel (the kernel is shorter than a 32-weight block).
// Parameter words (wp_*): per tile of T channels, KS APoT codes, one scale
// (Q4.12) and one bias (Q8.8) per channel.
// Timing: per token, ctiles cycles to collect, then ctiles output tiles at
// one per cycle plus 4 cycles of pipeline latency.
module causal_conv1d
  import vimq_pkg::*;
#(
  parameter int unsigned LANES = vimq_pkg::T,
  parameter int unsigned MAX_D = 1536,
  parameter int unsigned KS    = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] cfg_ctiles,          // channel tiles per token
  input  logic       wp_we,
  input  logic [$clog2(MAX_D/LANES)-1:0] wp_addr,
  input  w4_t        wp_w [LANES][KS],
  input  wscale_t    wp_scale [LANES],
  input  act_t       wp_bias [LANES],
  input  logic       in_valid,
  output logic       in_ready,
  input  act_t       in_data [LANES],
  input  logic       in_seq_first,       // sampled with a token's first tile
  output logic       out_valid,
  input  logic       out_ready,
  output act_t       out_data [LANES],
  output logic       out_last
);
  localparam int unsigned CT = MAX_D / LANES;
  localparam int unsigned CTW = $clog2(CT);
  localparam int unsigned ACC_W = 56;

  // parameter buffer
  w4_t     wbuf [CT][LANES][KS];
  wscale_t sbuf [CT][LANES];
  act_t    bbuf [CT][LANES];
  always_ff @(posedge clk) begin
    if (wp_we) begin
      wbuf[wp_addr] <= wp_w; sbuf[wp_addr] <= wp_scale; bbuf[wp_addr] <= wp_bias;
    end
  end

  logic en;
  assign en = !out_valid || out_ready;

  // ---- dynamic quantization ----
  logic q_valid, q_first, q_last, q_ready;
  q_t   q_data [LANES];
  logic [15:0] q_absmax;
  logic in_first_tile, seq_first_tok;
  logic [7:0] in_cnt;
  act_quantizer #(.LANES(LANES), .MAX_K(MAX_D)) u_quant (
    .clk, .rst_n, .cfg_ktiles(cfg_ctiles), .in_valid, .in_ready, .in_data,
    .out_valid(q_valid), .out_ready(q_ready), .out_q(q_data), .out_absmax(q_absmax),
    .out_first(q_first), .out_last(q_last));
  assign q_ready = en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin in_first_tile <= 1'b1; seq_first_tok <= 1'b0; in_cnt <= '0; end
    else if (in_valid && in_ready) begin
      if (in_first_tile) seq_first_tok <= in_seq_first;
      in_first_tile <= 1'b0;
      in_cnt <= in_cnt + 1'b1;
      if (in_cnt == cfg_ctiles - 1) begin in_first_tile <= 1'b1; in_cnt <= '0; end
    end
  end

  // ---- windowing ----
  q_t          hist [CT][LANES][KS-1];     // hist[.][.][0] = previous token
  logic [15:0] shist [KS-1];               // absmax of previous tokens
  logic [CTW-1:0] ct;
  logic        v_w, l_w;
  q_t          win [LANES][KS];
  logic [15:0] swin [KS];
  logic [CTW-1:0] ct_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ct <= '0; v_w <= 1'b0; l_w <= 1'b0; ct_w <= '0;
      for (int j = 0; j < int'(KS) - 1; j++) shist[j] <= '0;
      for (int j = 0; j < int'(KS); j++) swin[j] <= '0;
      for (int i = 0; i < int'(LANES); i++) for (int j = 0; j < int'(KS); j++) win[i][j] <= '0;
    end else if (en) begin
      v_w <= q_valid;
      if (q_valid) begin
        l_w  <= q_last;
        ct_w <= ct;
        ct   <= q_last ? '0 : ct + 1'b1;
        swin[0] <= q_absmax;
        for (int j = 1; j < int'(KS); j++) swin[j] <= seq_first_tok ? 16'd0 : shist[j-1];
        for (int i = 0; i < int'(LANES); i++) begin
          win[i][0] <= q_data[i];
          for (int j = 1; j < int'(KS); j++) win[i][j] <= seq_first_tok ? '0 : hist[ct][i][j-1];
        end
        if (q_last) begin
          shist[0] <= q_absmax;
          for (int j = 1; j < int'(KS) - 1; j++) shist[j] <= seq_first_tok ? 16'd0 : shist[j-1];
        end
      end
    end
  end
  always_ff @(posedge clk) begin
    if (en && q_valid)
      for (int i = 0; i < int'(LANES); i++) begin
        hist[ct][i][0] <= q_data[i];
        for (int j = 1; j < int'(KS) - 1; j++) hist[ct][i][j] <= seq_first_tok ? '0 : hist[ct][i][j-1];
      end
  end

  // ---- filtering: APoT shift-add per tap, per-token rescale, tap sum ----
  logic v_f, l_f;
  logic signed [ACC_W-1:0] acc_f [LANES];
  act_t bias_f [LANES];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_f <= 1'b0; l_f <= 1'b0;
      for (int i = 0; i < int'(LANES); i++) begin acc_f[i] <= '0; bias_f[i] <= '0; end
    end else if (en) begin
      v_f <= v_w;
      if (v_w) begin
        l_f <= l_w;
        for (int i = 0; i < int'(LANES); i++) begin
          logic signed [ACC_W-1:0] s;
          s = '0;
          for (int j = 0; j < int'(KS); j++) begin
            w4_t w;
            logic signed [ACC_W-1:0] sh;
            w  = wbuf[ct_w][i][j];
            sh = ACC_W'(apot_term(win[i][j], w[2:0]));
            sh = sh * ACC_W'($signed({1'b0, swin[j]}));
            s  = w[3] ? s - sh : s + sh;
          end
          acc_f[i]  <= s * ACC_W'($signed({1'b0, sbuf[ct_w][i]}));
          bias_f[i] <= bbuf[ct_w][i];
        end
      end
    end
  end

  ctrl_pkt_t c_f, c_o;
  always_comb begin
    c_f = '0;
    c_f.tok_last = l_f;
  end
  dequant_postproc #(.LANES(LANES), .ACC_W(ACC_W)) u_post (
    .clk, .rst_n, .en, .cfg_act(ACT_SILU), .cfg_bias_en(1'b1), .in_valid(v_f), .in_acc(acc_f),
    .in_absmax(16'd1), .in_bias(bias_f), .in_ctrl(c_f), .out_valid(out_valid), .out_y(out_data),
    .out_ctrl(c_o));
  assign out_last = c_o.tok_last;
endmodule
