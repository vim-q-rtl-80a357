// tb_vimq_top: end-to-end test of the accelerator at reduced buffer
// capacities and small run-time sizes (width 32, 4 patches, 32 -> 128 linear
// layer) with random output back-pressure; see tb_vimq_top_body.svh for the
// scenario and the checks.
module tb_vimq_top;
  localparam int LMK = 64, LMN = 128, LWD = 16, SMD = 16, CMD = 64, NMD = 32, SQ = 8, SQC = 32;
  localparam int DM = 32, NP = 4, LNT = 8, BP = 1;
`include "tb_vimq_top_body.svh"
  vimq_top #(.LANES(16), .LIN_MAX_K(LMK), .LIN_MAX_N(LMN), .LIN_WDEPTH(LWD), .SSM_NB(16), .SSM_MAX_D(SMD),
             .CONV_MAX_D(CMD), .NORM_MAX_D(NMD), .SEQ_MAX(SQ), .SEQ_MAX_CH(SQC)) dut (.*);
endmodule
