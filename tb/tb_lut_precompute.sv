// tb_lut_precompute: checks the APoT LUT pre-computation unit. For random
// INT8 tiles every LUT entry must equal x * level(idx) * 2^8 with the APoT
// levels 0, 1/2, 1/4, 1/16, 1/8, 1/2+1/8, 1/4+1/8, 1/16+1/8, and the replay
// must visit (n, k) in n-major order with the right reset / flush (blocks of
// two tiles), row_end and tok_last flags, one packet per cycle.
module tb_lut_precompute;
  import vimq_pkg::*;
  localparam int L = 16, KT = 3, NT = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] cfg_ktiles = KT; logic [9:0] cfg_ntiles = NT;
  logic in_valid = 0, in_ready, in_last = 0; q_t in_q [L];
  logic out_valid, out_ready = 1; lut_t out_lut [L][8]; ctrl_pkt_t out_ctrl;
  lut_precompute #(.LANES(L), .MAX_K(64)) dut (.*);
  int Q [KT][L];
  real lv [8] = '{0.0, 0.5, 0.25, 0.0625, 0.125, 0.625, 0.375, 0.1875};
  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int cnt;
    for (int k = 0; k < KT; k++) for (int i = 0; i < L; i++) Q[k][i] = $urandom_range(0, 254) - 127;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < KT; k++) begin
      @(negedge clk); in_valid = 1; in_last = (k == KT-1);
      for (int i = 0; i < L; i++) in_q[i] = q_t'(Q[k][i]);
      #1; while (!in_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); in_valid = 0; #1;
    cnt = 0;
    for (int n = 0; n < NT; n++) for (int k = 0; k < KT; k++) begin
      if (!out_valid) begin failures++; $display("gap at n%0d k%0d", n, k); end
      checks++;
      if (out_ctrl.in_grp != 8'(k) || out_ctrl.out_grp != 10'(n)) failures++;
      if (out_ctrl.reset != (k % 2 == 0) || out_ctrl.flush != (k % 2 == 1 || k == KT-1)) failures++;
      if (out_ctrl.row_end != (k == KT-1) || out_ctrl.tok_last != (k == KT-1 && n == NT-1)) failures++;
      checks += L*8;
      for (int i = 0; i < L; i++) for (int j = 0; j < 8; j++)
        if ($itor(out_lut[i][j]) != Q[k][i] * lv[j] * 256.0) begin
          failures++; if (failures < 8) $display("k%0d i%0d j%0d got %0d", k, i, j, out_lut[i][j]);
        end
      @(negedge clk); #1;
    end
    checks++; if (out_valid || !in_ready) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
