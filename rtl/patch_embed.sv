// patch_embed: token assembly stage of patch embedding (paper Sec. IV
// "Auxiliary Engines", Fig. 9 "Patch Embedding").
//
// Vision Mamba turns a 224 x 224 image into 14 x 14 = 196 patch tokens by a
// 16 x 16 stride-16 convolution, adds a learned position embedding to every
// token and inserts a class token in the middle of the sequence. In this
// design the convolution, which is a 768-input linear layer over flattened
// patches, runs on the unified linear engine; this engine takes its output
// token stream (cfg_len patch tokens of cfg_ctiles tiles) and produces the
// cfg_len+1 token encoder input:
//   out token p = patch[p'] + pos[p]     for p != cfg_cls_pos
//   out token cfg_cls_pos = cls + pos[cfg_cls_pos]
// where p' counts the patch tokens. Position embeddings (MAX_TOK x MAX_D) and
// the class token live in an on-chip buffer loaded through pe_we (address
// token*MAX_D/T + tile; address MAX_TOK*MAX_D/T + tile holds the class token).
// The paper names this engine only; this split and the buffer layout are this
// design's choices. Timing: one tile per cycle, one cycle latency; while the
// class token is emitted the input is stalled for cfg_ctiles cycles.
module patch_embed
  import vimq_pkg::*;
#(
  parameter int unsigned LANES   = vimq_pkg::T,
  parameter int unsigned MAX_TOK = 257,
  parameter int unsigned MAX_D   = 768
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [8:0]  cfg_len,        // patch tokens (without the class token)
  input  logic [8:0]  cfg_cls_pos,
  input  logic [7:0]  cfg_ctiles,
  input  logic        pe_we,
  input  logic [$clog2((MAX_TOK+1)*(MAX_D/LANES))-1:0] pe_addr,
  input  act_t        pe_data [LANES],
  input  logic        in_valid,
  output logic        in_ready,
  input  act_t        in_data [LANES],
  output logic        out_valid,
  input  logic        out_ready,
  output act_t        out_data [LANES],
  output logic        out_last
);
  localparam int unsigned CT = MAX_D / LANES;
  localparam int unsigned DEPTH = (MAX_TOK + 1) * CT;
  localparam int unsigned AW = $clog2(DEPTH);

  act_t pbuf [DEPTH][LANES];
  always_ff @(posedge clk) begin
    if (pe_we) pbuf[pe_addr] <= pe_data;
  end

  logic [8:0] tok;     // output token index
  logic [7:0] ct;
  logic       at_cls, adv, tile_end, seq_end;
  assign at_cls   = (tok == cfg_cls_pos);
  assign tile_end = (ct == cfg_ctiles - 1);
  assign seq_end  = tile_end && (tok == cfg_len);        // cfg_len+1 tokens out
  assign adv      = !out_valid || out_ready;
  assign in_ready = adv && !at_cls;

  logic [AW-1:0] pos_addr, cls_addr;
  assign pos_addr = AW'(32'(tok) * CT + 32'(ct));
  assign cls_addr = AW'(MAX_TOK * CT + 32'(ct));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_last <= 1'b0; tok <= '0; ct <= '0;
      for (int i = 0; i < int'(LANES); i++) out_data[i] <= '0;
    end else if (adv) begin
      out_valid <= 1'b0;
      if (at_cls || in_valid) begin
        out_valid <= 1'b1;
        out_last  <= seq_end;
        for (int i = 0; i < int'(LANES); i++)
          out_data[i] <= sat_act(64'(pbuf[pos_addr][i]) + (at_cls ? 64'(pbuf[cls_addr][i]) : 64'(in_data[i])));
        ct <= tile_end ? '0 : ct + 1'b1;
        if (tile_end) tok <= seq_end ? '0 : tok + 1'b1;
      end
    end
  end
endmodule
