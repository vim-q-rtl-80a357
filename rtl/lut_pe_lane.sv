// lut_pe_lane: one LUT indexing and summation PE lane (paper Sec. V-C, Fig. 3).
//
// A lane computes one output channel. For each of the T inputs of the current
// tile the 3-bit APoT magnitude of its weight drives an 8-to-1 multiplexer
// over that input's pre-computed LUT, and the sign bit drives a conditional
// inverter (two's-complement negation). A T-input adder tree sums the T
// selected terms, and an accumulator register adds the sums of the tiles that
// form one weight quantization block (block of 32 inputs = 2 tiles of 16):
// the control packet's reset bit restarts it, its flush bit marks the block
// sum as valid. The lane holds no other state. Weight nibble: bit 3 sign,
// bits 2:0 magnitude index (this design's encoding).
// Timing: one tile per cycle when en is high; block sum valid one cycle after
// the flushing tile. Output units: 2^-F times (INT8 x APoT level).
module lut_pe_lane
  import vimq_pkg::*;
#(
  parameter int unsigned LANES = vimq_pkg::T,
  parameter int unsigned SUM_W = 26
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       in_valid,
  input  lut_t       in_lut [LANES][8],
  input  w4_t        in_w   [LANES],
  input  ctrl_pkt_t  in_ctrl,
  output logic       out_valid,
  output logic signed [SUM_W-1:0] out_sum,
  output ctrl_pkt_t  out_ctrl
);
  logic signed [SUM_W-1:0] tree;
  always_comb begin
    tree = '0;
    for (int i = 0; i < int'(LANES); i++) begin
      lut_t sel;
      sel  = in_lut[i][in_w[i][2:0]];
      tree = tree + (in_w[i][3] ? -SUM_W'(sel) : SUM_W'(sel));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_sum <= '0; out_ctrl <= '0;
    end else if (en) begin
      out_valid <= in_valid && in_ctrl.flush;
      if (in_valid) begin
        out_sum  <= in_ctrl.reset ? tree : out_sum + tree;
        out_ctrl <= in_ctrl;
      end
    end
  end
endmodule
