// dequant_postproc: fused dequantization and post-processing pipeline of the
// linear engine (paper Sec. V-B, Fig. 3 stage 5 and inset 3).
//
// Input: a row of T accumulated values in units of 2^-(F+12) (APoT LUT
// pre-shift F=8 and 12 fractional bits of the weight scale) and the token's
// absmax (Q8.8). The real activation scale is absmax/127, so
//   y = acc * absmax / 127 / 2^20           (Q8.8 result)
// realised as acc * absmax * 132104 >> 44 (132104 = round(2^24/127)); the final
// right shift also undoes the pre-shift. Then bias is added and an optional
// nonlinearity applied. Following the paper, SiLU and SoftPlus are computed as
// ReLU plus a correction read from a look-up table, and because the
// correction is even in x only the half for |x| is stored:
//   SiLU(x)     = ReLU(x) - g(|x|),  g(a) = a / (1 + e^a)
//   SoftPlus(x) = ReLU(x) + h(|x|),  h(a) = ln(1 + e^-a)
// Each table has 256 entries sampled every 1/32 over [0, 8) (Q8.8 values,
// read from silu_lut.hex / softplus_lut.hex); beyond 8 the correction is taken
// as 0. Table size, sampling and the reciprocal constant are this design's.
// Timing: 2-stage pipeline, advancing when en is high.
module dequant_postproc
  import vimq_pkg::*;
#(
  parameter int unsigned LANES = vimq_pkg::T,
  parameter int unsigned ACC_W = 48
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  act_fn_e    cfg_act,
  input  logic       cfg_bias_en,
  input  logic       in_valid,
  input  logic signed [ACC_W-1:0] in_acc [LANES],
  input  logic [15:0] in_absmax,
  input  act_t       in_bias [LANES],
  input  ctrl_pkt_t  in_ctrl,
  output logic       out_valid,
  output act_t       out_y [LANES],
  output ctrl_pkt_t  out_ctrl
);
  logic [7:0] silu_tab [256];
  logic [7:0] softplus_tab [256];
  initial begin
    $readmemh("rtl/silu_lut.hex", silu_tab);
    $readmemh("rtl/softplus_lut.hex", softplus_tab);
  end

  // stage 1: rescale + bias
  logic       v1;
  act_t       s1 [LANES];
  ctrl_pkt_t  c1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; c1 <= '0;
      for (int i = 0; i < int'(LANES); i++) s1[i] <= '0;
    end else if (en) begin
      v1 <= in_valid;
      c1 <= in_ctrl;
      for (int i = 0; i < int'(LANES); i++) begin
        logic signed [95:0] p;
        p = 96'(in_acc[i]) * 96'($signed({1'b0, in_absmax})) * 96'sd132104;
        p = (p + (96'sd1 <<< 43)) >>> 44;
        if (cfg_bias_en) p = p + 96'(in_bias[i]);
        s1[i] <= (p > 96'sd32767) ? act_t'(16'sh7fff) : ((p < -96'sd32768) ? act_t'(16'sh8000) : act_t'(p));
      end
    end
  end

  // stage 2: ReLU + half-table correction
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_ctrl <= '0;
      for (int i = 0; i < int'(LANES); i++) out_y[i] <= '0;
    end else if (en) begin
      out_valid <= v1;
      out_ctrl  <= c1;
      for (int i = 0; i < int'(LANES); i++) begin
        logic [15:0] a;
        logic [7:0]  corr_g, corr_h;
        act_t        relu;
        a      = s1[i][ACT_W-1] ? 16'(-s1[i]) : 16'(s1[i]);
        relu   = s1[i][ACT_W-1] ? '0 : s1[i];
        corr_g = (a < 16'd2048) ? silu_tab[a[10:3]] : 8'd0;
        corr_h = (a < 16'd2048) ? softplus_tab[a[10:3]] : 8'd0;
        case (cfg_act)
          ACT_RELU:     out_y[i] <= relu;
          ACT_SILU:     out_y[i] <= relu - act_t'({8'd0, corr_g});
          ACT_SOFTPLUS: out_y[i] <= relu + act_t'({8'd0, corr_h});
          default:      out_y[i] <= s1[i];
        endcase
      end
    end
  end
endmodule
