// tb_lut_pe_lane: checks one LUT indexing and summation PE lane. Random LUT
// sets (built here as x * level * 256) and random 4-bit weights are applied;
// the block sum after a reset/flush pair of tiles must equal
// sum over both tiles of (sign ? -1 : 1) * LUT[i][mag], and no output may
// appear on a non-flush tile.
module tb_lut_pe_lane;
  import vimq_pkg::*;
  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 1, in_valid = 0; lut_t in_lut [L][8]; w4_t in_w [L]; ctrl_pkt_t in_ctrl;
  logic out_valid; logic signed [25:0] out_sum; ctrl_pkt_t out_ctrl;
  lut_pe_lane #(.LANES(L)) dut (.*);
  int lv [8] = '{0, 128, 64, 16, 32, 160, 96, 48};
  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_ctrl = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int blk = 0; blk < 20; blk++) begin
      automatic longint exp_sum = 0;
      for (int tile = 0; tile < 2; tile++) begin
        @(negedge clk);
        in_valid = 1; in_ctrl = '0; in_ctrl.reset = (tile == 0); in_ctrl.flush = (tile == 1);
        for (int i = 0; i < L; i++) begin
          automatic int x = $urandom_range(0, 254) - 127;
          for (int j = 0; j < 8; j++) in_lut[i][j] = lut_t'(x * lv[j]);
          in_w[i] = w4_t'($urandom);
          exp_sum += (in_w[i][3] ? -1 : 1) * x * lv[in_w[i][2:0]];
        end
        @(posedge clk); #1;
        checks++;
        if (out_valid != (tile == 1)) failures++;
        if (tile == 1 && longint'(out_sum) != exp_sum) begin
          failures++; $display("blk %0d got %0d exp %0d", blk, out_sum, exp_sum);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
