// lut_precompute: APoT LUT pre-computation and control-packet orchestration
// (paper Sec. V-C, Fig. 3).
//
// For every INT8 element x of an incoming 1 x T tile the unit builds the eight
// values a 4-bit APoT weight magnitude can select, already pre-shifted by F=8
// so that no fraction is lost (paper: for basis 2^-k compute x << (F-k)):
//   LUT[0]=0, LUT[1]=x<<7, LUT[2]=x<<6, LUT[3]=x<<4, LUT[4]=x<<5,
//   LUT[5]=LUT[1]+LUT[4], LUT[6]=LUT[2]+LUT[4], LUT[7]=LUT[3]+LUT[4]
// (coarse basis {0,2^-1,2^-2,2^-4} plus fine basis {0,2^-3}; the index
// labels follow the LUT[i] boxes of Fig. 3). Signs are left to the PEs.
// The LUT sets of all ktiles tiles of a token are computed once, on arrival,
// and kept in a LUT buffer. The unit then replays them for every output group
// n (outer loop) and input group k (inner loop), attaching a control packet:
// group ids, reset (first tile of a weight quantization block), flush (last
// tile of a block), row_end (k = last) and tok_last. This is the order in
// which the re-ordered weight tiles sit in the weight buffer, so the weight
// read address is a plain counter. The n-outer order and keeping the LUTs in
// a buffer are this design's choices; the paper says only that LUTs are
// computed once per input tile and travel with control packets.
// Timing: ktiles cycles to collect, then ntiles*ktiles packets at one per
// cycle under out_ready; input is stalled during replay.
// Constant output bits: LUT entry 0 is always zero and the low k bits of an
// x<<k entry are zero by construction; they are kept so that every entry has
// the same 18-bit format for the PE multiplexers.
module lut_precompute
  import vimq_pkg::*;
#(
  parameter int unsigned LANES = vimq_pkg::T,
  parameter int unsigned MAX_K = 1536,
  parameter int unsigned BLK_TILES = vimq_pkg::QBLK / vimq_pkg::T
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] cfg_ktiles,
  input  logic [9:0] cfg_ntiles,
  input  logic       in_valid,
  output logic       in_ready,
  input  q_t         in_q [LANES],
  input  logic       in_last,
  output logic       out_valid,
  input  logic       out_ready,
  output lut_t       out_lut [LANES][8],
  output ctrl_pkt_t  out_ctrl
);
  localparam int unsigned NT = MAX_K / LANES;
  localparam int unsigned IW = (NT > 1) ? $clog2(NT) : 1;   // buffer index width
  typedef logic [LANES*8*LUT_W-1:0] lut_word_t;

  lut_word_t  lutbuf [NT];
  logic [7:0] wr_k, rd_k;
  logic [9:0] rd_n;
  logic       replay;

  // LUT generation (shift-add only)
  lut_word_t new_word;
  always_comb begin
    for (int i = 0; i < int'(LANES); i++) begin
      lut_t x, s7, s6, s5, s4;
      x  = lut_t'(in_q[i]);
      // 2^-1, 2^-2, 2^-3, 2^-4 scaled by the 2^PRESHIFT pre-shift
      s7 = x <<< (PRESHIFT-1); s6 = x <<< (PRESHIFT-2); s5 = x <<< (PRESHIFT-3); s4 = x <<< (PRESHIFT-4);
      new_word[(i*8+0)*LUT_W +: LUT_W] = '0;
      new_word[(i*8+1)*LUT_W +: LUT_W] = s7;
      new_word[(i*8+2)*LUT_W +: LUT_W] = s6;
      new_word[(i*8+3)*LUT_W +: LUT_W] = s4;
      new_word[(i*8+4)*LUT_W +: LUT_W] = s5;
      new_word[(i*8+5)*LUT_W +: LUT_W] = s7 + s5;
      new_word[(i*8+6)*LUT_W +: LUT_W] = s6 + s5;
      new_word[(i*8+7)*LUT_W +: LUT_W] = s4 + s5;
    end
  end

  assign in_ready = !replay;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) lutbuf[wr_k[IW-1:0]] <= new_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_k <= '0; rd_k <= '0; rd_n <= '0; replay <= 1'b0;
    end else if (!replay) begin
      if (in_valid) begin
        if (in_last || wr_k == cfg_ktiles - 1) begin
          wr_k <= '0; rd_k <= '0; rd_n <= '0; replay <= 1'b1;
        end else wr_k <= wr_k + 1'b1;
      end
    end else if (out_ready) begin
      if (rd_k == cfg_ktiles - 1) begin
        rd_k <= '0;
        if (rd_n == cfg_ntiles - 1) begin
          rd_n <= '0; replay <= 1'b0;
        end else rd_n <= rd_n + 1'b1;
      end else rd_k <= rd_k + 1'b1;
    end
  end

  assign out_valid = replay;
  always_comb begin
    for (int i = 0; i < int'(LANES); i++)
      for (int j = 0; j < 8; j++)
        out_lut[i][j] = lut_t'(lutbuf[rd_k[IW-1:0]][(i*8+j)*LUT_W +: LUT_W]);
    out_ctrl.in_grp   = rd_k;
    out_ctrl.out_grp  = rd_n;
    out_ctrl.reset    = (rd_k % 8'(BLK_TILES)) == 0;
    out_ctrl.flush    = ((rd_k % 8'(BLK_TILES)) == 8'(BLK_TILES - 1)) || (rd_k == cfg_ktiles - 1);
    out_ctrl.row_end  = (rd_k == cfg_ktiles - 1);
    out_ctrl.tok_last = (rd_k == cfg_ktiles - 1) && (rd_n == cfg_ntiles - 1);
  end
endmodule
