// patch_ops: patch (token) manipulation engine (paper Sec. IV "Auxiliary
// Engines": CLS token extraction and sequence flipping; the Flip boxes of
// Fig. 1).
//
// Modes (cfg_mode):
//   PO_PASS  tokens pass unchanged
//   PO_FLIP  a whole sequence of cfg_len tokens is stored, then read out in
//            reverse token order (channel order inside a token is kept); the
//            backward scan direction of the bidirectional Vision Mamba block
//            consumes and produces flipped sequences
//   PO_CLS   only token cfg_cls_pos is forwarded (the class token, which
//            Vision Mamba places in the middle of the sequence), the rest
//            are dropped; it feeds the classification head
// A token is cfg_ctiles tiles of T channels, one tile per cycle.
// The buffer holds MAX_TOK tokens of MAX_CH channels: 257 tokens covers the
// 256 x 256 input (16 x 16 patches plus the class token) and 768 channels
// the inner width of ViM-s; these capacities are this design's choice.
// Flip timing: len*ctiles cycles to store, then len*ctiles cycles to emit;
// input is refused while emitting.
module patch_ops
  import vimq_pkg::*;
#(
  parameter int unsigned LANES   = vimq_pkg::T,
  parameter int unsigned MAX_TOK = 257,
  parameter int unsigned MAX_CH  = 768
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  cfg_mode,
  input  logic [8:0]  cfg_len,
  input  logic [8:0]  cfg_cls_pos,
  input  logic [7:0]  cfg_ctiles,
  input  logic        in_valid,
  output logic        in_ready,
  input  act_t        in_data [LANES],
  output logic        out_valid,
  input  logic        out_ready,
  output act_t        out_data [LANES],
  output logic        out_last             // last tile of the output sequence
);
  localparam logic [1:0] PO_PASS = 2'd0, PO_FLIP = 2'd1, PO_CLS = 2'd2;
  localparam int unsigned CT = MAX_CH / LANES;
  localparam int unsigned DEPTH = MAX_TOK * CT;

  typedef logic [LANES*ACT_W-1:0] tile_t;
  tile_t buffer [DEPTH];

  logic [8:0] tok;
  logic [7:0] ct;
  logic       emitting;
  logic       tile_end, tok_end;
  assign tile_end = (ct == cfg_ctiles - 1);
  assign tok_end  = tile_end && (tok == cfg_len - 1);

  // pass / CLS path register
  logic  pv, pl;
  tile_t pd;
  // flip read data register
  tile_t rd;
  logic  take;
  logic [$clog2(DEPTH)-1:0] waddr, raddr;
  assign waddr = ($clog2(DEPTH))'(32'(tok) * CT + 32'(ct));
  assign raddr = ($clog2(DEPTH))'((32'(cfg_len) - 32'd1 - 32'(tok)) * CT + 32'(ct));

  tile_t in_flat;
  always_comb
    for (int i = 0; i < int'(LANES); i++) in_flat[i*ACT_W +: ACT_W] = in_data[i];

  logic fv;  // flip output valid register
  logic fl;
  assign in_ready = (cfg_mode == PO_FLIP) ? !emitting : (!pv || out_ready);
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (take && cfg_mode == PO_FLIP) buffer[waddr] <= in_flat;
    if (emitting && (!fv || out_ready)) rd <= buffer[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok <= '0; ct <= '0; emitting <= 1'b0; pv <= 1'b0; pl <= 1'b0; pd <= '0; fv <= 1'b0; fl <= 1'b0;
    end else begin
      if (!pv || out_ready) pv <= 1'b0;
      if (fv && out_ready) fv <= 1'b0;
      if (take) begin
        ct <= tile_end ? '0 : ct + 1'b1;
        if (tile_end) tok <= tok_end ? '0 : tok + 1'b1;
        if (cfg_mode == PO_FLIP) begin
          if (tok_end) emitting <= 1'b1;
        end else if (cfg_mode == PO_PASS || tok == cfg_cls_pos) begin
          pv <= 1'b1; pd <= in_flat;
          pl <= (cfg_mode == PO_PASS) ? tok_end : tile_end;
        end
      end else if (emitting && (!fv || out_ready)) begin
        fv <= 1'b1;
        fl <= tok_end;
        ct <= tile_end ? '0 : ct + 1'b1;
        if (tile_end) tok <= tok_end ? '0 : tok + 1'b1;
        if (tok_end) emitting <= 1'b0;
      end
    end
  end

  assign out_valid = pv || fv;
  assign out_last  = fv ? fl : pl;
  always_comb
    for (int i = 0; i < int'(LANES); i++) out_data[i] = fv ? rd[i*ACT_W +: ACT_W] : pd[i*ACT_W +: ACT_W];
endmodule
