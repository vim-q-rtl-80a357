// tb_vimq_top_full: the end-to-end scenario of tb_vimq_top with the
// accelerator at its default buffer capacities and ViM-tiny run-time sizes:
// hidden width 192, 196 patches + class token (224 x 224 input), and a
// 192 -> 384 linear layer, whose steady-state cycles per token are checked.
module tb_vimq_top_full;
  localparam int LMK = 1536, LMN = 3072, LWD = 9216, SMD = 1536, CMD = 1536, NMD = 768, SQ = 257, SQC = 768;
  localparam int DM = 192, NP = 196, LNT = 24, BP = 0;
`include "tb_vimq_top_body.svh"
  vimq_top dut (.*);
endmodule
