// act_quantizer: dynamic per-token AbsMax activation quantizer (front of the
// unified linear engine, paper Sec. V-B and Fig. 3).
//
// A token of K = ktiles*T channels arrives as 1 x T tiles of Q8.8 values.
// While the tiles stream in they are stored in a token buffer and a parallel
// max-reduction tree over the T lanes keeps the running absolute maximum.
// After the last tile the token's maximum is turned into a quantization
// factor inv = round(127 * 2^16 / absmax) by one divider, and the stored tiles
// are read back and mapped to INT8: q = sat127(round(x * inv / 2^16)).
// The token's absmax (Q8.8) is reported with each output tile as the scale
// the dequantizer needs (real scale = absmax / 127).
// Following the paper: per-token absmax via parallel reduction, scale derived
// per token and forwarded to the dequantizer. This design's choices: the
// "division unit" is one reciprocal division per token followed by T
// multiplies, symmetric INT8 range [-127,127], round half up.
// Timing: ktiles cycles to collect, 1 cycle to form inv, then ktiles output
// tiles at one per cycle under out_ready. Input is refused while emitting.
module act_quantizer
  import vimq_pkg::*;
#(
  parameter int unsigned LANES = vimq_pkg::T,
  parameter int unsigned MAX_K = 1536
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] cfg_ktiles,            // tiles per token (K / LANES), >= 1
  input  logic       in_valid,
  output logic       in_ready,
  input  act_t       in_data [LANES],
  output logic       out_valid,
  input  logic       out_ready,
  output q_t         out_q [LANES],
  output logic [15:0] out_absmax,           // token absmax, Q8.8 magnitude
  output logic       out_first,
  output logic       out_last
);
  localparam int unsigned NT = MAX_K / LANES;
  localparam int unsigned IW = (NT > 1) ? $clog2(NT) : 1;   // buffer index width
  typedef enum logic [1:0] {S_COLLECT, S_RECIP, S_EMIT} state_e;
  state_e state;

  act_t buffer [NT][LANES];
  logic [7:0]  wr_idx, rd_idx;
  logic [15:0] absmax;
  logic [23:0] inv;

  // parallel reduction of |x| over the lanes of the incoming tile
  logic [15:0] tile_max;
  always_comb begin
    tile_max = '0;
    for (int i = 0; i < int'(LANES); i++) begin
      logic [15:0] a;
      a = in_data[i][ACT_W-1] ? 16'(-in_data[i]) : 16'(in_data[i]);
      if (a > tile_max) tile_max = a;
    end
  end

  assign in_ready = (state == S_COLLECT);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) buffer[wr_idx[IW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_COLLECT; wr_idx <= '0; rd_idx <= '0; absmax <= '0; inv <= '0;
    end else begin
      case (state)
        S_COLLECT: if (in_valid) begin
          absmax <= (wr_idx == 0) ? tile_max : ((tile_max > absmax) ? tile_max : absmax);
          if (wr_idx == cfg_ktiles - 1) begin
            wr_idx <= '0;
            state  <= S_RECIP;
          end else wr_idx <= wr_idx + 1'b1;
        end
        S_RECIP: begin
          inv    <= (absmax == 0) ? 24'd0 : 24'(((32'd127 << 16) + 32'(absmax >> 1)) / 32'(absmax));
          rd_idx <= '0;
          state  <= S_EMIT;
        end
        default: if (out_ready) begin
          if (rd_idx == cfg_ktiles - 1) state <= S_COLLECT;
          else rd_idx <= rd_idx + 1'b1;
        end
      endcase
    end
  end

  always_comb begin
    for (int i = 0; i < int'(LANES); i++) begin
      logic signed [41:0] p;
      logic signed [41:0] r;
      p = 42'(buffer[rd_idx[IW-1:0]][i]) * $signed({18'd0, inv});
      r = (p + 42'sd32768) >>> 16;
      if (r > 42'sd127)       out_q[i] = 8'sd127;
      else if (r < -42'sd127) out_q[i] = -8'sd127;
      else                    out_q[i] = q_t'(r);
    end
  end

  assign out_valid  = (state == S_EMIT);
  assign out_absmax = absmax;
  assign out_first  = (rd_idx == 0);
  assign out_last   = (rd_idx == cfg_ktiles - 1);
endmodule
