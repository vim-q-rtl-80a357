// layer_smoothing: explicit per-channel activation smoothing layer (paper
// Sec. III-A, Fig. 9 "Layer Smoothing").
//
// Smoothing divides activation channel j by s_j = max|X_j|^a / max|W_j|^(1-a)
// and multiplies the matching weights by s_j. Where a linear layer follows
// another linear layer the division is folded into the upstream weights;
// where a nonlinearity sits in between, the division has to be done on the
// activations, which is this engine: out[c] = x[c] * (1/s_c). The factors
// 1/s_c (Q4.12, computed off-line) are held in an on-chip buffer, one word
// of T factors per channel tile; the tile index runs 0..ctiles-1 per token.
// Formats: Q8.8 in and out, saturating, round to nearest.
// Timing: one tile per cycle, one cycle latency, valid/ready stream.
module layer_smoothing
  import vimq_pkg::*;
#(
  parameter int unsigned LANES = vimq_pkg::T,
  parameter int unsigned MAX_D = 1536
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] cfg_ctiles,
  input  logic       s_we,
  input  logic [$clog2(MAX_D/LANES)-1:0] s_addr,
  input  wscale_t    s_data [LANES],
  input  logic       in_valid,
  output logic       in_ready,
  input  act_t       in_data [LANES],
  output logic       out_valid,
  input  logic       out_ready,
  output act_t       out_data [LANES],
  output logic       out_last
);
  localparam int unsigned CT = MAX_D / LANES;
  wscale_t sbuf [CT][LANES];
  always_ff @(posedge clk) begin
    if (s_we) sbuf[s_addr] <= s_data;
  end

  logic [$clog2(CT)-1:0] ct;
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_last <= 1'b0; ct <= '0;
      for (int i = 0; i < int'(LANES); i++) out_data[i] <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_last <= (8'(ct) == cfg_ctiles - 1);
        ct <= (8'(ct) == cfg_ctiles - 1) ? '0 : ct + 1'b1;
        for (int i = 0; i < int'(LANES); i++) begin
          logic signed [63:0] p;
          p = (64'(in_data[i]) * $signed({48'd0, sbuf[ct][i]}) + 64'sd2048) >>> SC_FRAC;
          out_data[i] <= sat_act(p);
        end
      end
    end
  end
endmodule
