// ssm_projection: stage 2 of the SSM engine, the state projection engine
// (paper Sec. VI-C, Fig. 6a): y_t[d] = sum_n h_t[d][n] * C_t[n].
//
// Each slot brings NB updated states and the matching NB-slice of C_t. The
// products go through an NB-input adder tree; when the state dimension spans
// several blocks the block sums are accumulated (blk_first restarts,
// blk_last emits), compressing the state into one scalar per channel.
// u and z ride along for stage 3.
// Formats: h Q16.16, C Q8.8, y Q16.16. Timing: one slot per cycle on en,
// y valid one cycle after the channel's last block.
module ssm_projection
  import vimq_pkg::*;
#(
  parameter int unsigned NB = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  ssm_t in_h [NB],
  input  act_t in_c [NB],
  input  act_t in_u,
  input  act_t in_z,
  input  logic [15:0] in_d,
  input  logic in_blk_first,
  input  logic in_blk_last,
  input  logic in_tok_last,
  output logic out_valid,
  output ssm_t out_y,
  output act_t out_u,
  output act_t out_z,
  output logic [15:0] out_d,
  output logic out_tok_last
);
  logic signed [63:0] tree;
  always_comb begin
    tree = '0;
    for (int n = 0; n < int'(NB); n++) tree = tree + (64'(in_h[n]) * 64'(in_c[n]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_y <= '0; out_u <= '0; out_z <= '0; out_d <= '0; out_tok_last <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid && in_blk_last;
      if (in_valid) begin
        out_y <= in_blk_first ? ssm_t'(tree >>> ACT_FRAC) : out_y + ssm_t'(tree >>> ACT_FRAC);
        out_u <= in_u; out_z <= in_z; out_d <= in_d; out_tok_last <= in_tok_last;
      end
    end
  end
endmodule
