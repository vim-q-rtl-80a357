// weight_scale_accum: block-quantized weight scaling and row-level
// accumulation (paper Fig. 3, fourth stage of the linear engine).
//
// Each lane receives one block sum per weight quantization block from its PE
// lane, multiplies it by that block's scale (unsigned, 12 fractional bits, the
// block absmax of Fig. 2's listing) and accumulates the products over all
// blocks of the input dimension. When the control packet says row_end the
// accumulated row (one value per output channel of the tile) is emitted.
// The paper names the stage and its function; the multiplier/accumulator
// arrangement and widths are this design's. Timing: one block per cycle when
// en is high; result valid one cycle after the row_end block.
module weight_scale_accum
  import vimq_pkg::*;
#(
  parameter int unsigned LANES = vimq_pkg::T,
  parameter int unsigned SUM_W = 26,
  parameter int unsigned ACC_W = 48
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       in_valid,
  input  logic signed [SUM_W-1:0] in_sum [LANES],
  input  wscale_t    in_scale [LANES],
  input  ctrl_pkt_t  in_ctrl,
  output logic       out_valid,
  output logic signed [ACC_W-1:0] out_acc [LANES],
  output ctrl_pkt_t  out_ctrl
);
  logic first;  // next block is the first of a row
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; first <= 1'b1; out_ctrl <= '0;
      for (int i = 0; i < int'(LANES); i++) out_acc[i] <= '0;
    end else if (en) begin
      out_valid <= in_valid && in_ctrl.row_end;
      if (in_valid) begin
        out_ctrl <= in_ctrl;
        first    <= in_ctrl.row_end;
        for (int i = 0; i < int'(LANES); i++) begin
          logic signed [ACC_W-1:0] p;
          p = ACC_W'(in_sum[i]) * ACC_W'($signed({1'b0, in_scale[i]}));
          out_acc[i] <= first ? p : out_acc[i] + p;
        end
      end
    end
  end
endmodule
