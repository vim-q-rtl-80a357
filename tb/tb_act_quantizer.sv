// tb_act_quantizer: checks the dynamic per-token quantizer. Random tokens
// (one with an outlier, one all-zero) are sent; each INT8 output must equal
// round(x * 127 / absmax) within one step and lie in [-127, 127], the element
// with the largest magnitude must map to +-127, the reported absmax must be
// exact, and a token of k tiles must come out k+1 cycles after its last tile
// is accepted at the latest.
module tb_act_quantizer;
  import vimq_pkg::*;
  localparam int L = 16, KT = 4, NTOK = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] cfg_ktiles = KT;
  logic in_valid = 0, in_ready; act_t in_data [L];
  logic out_valid, out_ready = 1, out_first, out_last; q_t out_q [L]; logic [15:0] out_absmax;
  act_quantizer #(.LANES(L), .MAX_K(64)) dut (.*);

  int X [NTOK][KT*L];
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < NTOK; t++) for (int i = 0; i < KT*L; i++) X[t][i] = $urandom_range(0, 4000) - 2000;
    X[2][17] = -30000;
    for (int i = 0; i < KT*L; i++) X[3][i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < NTOK; t++) begin
      automatic int am = 0;
      automatic int wait_c = 0;
      for (int i = 0; i < KT*L; i++) if ((X[t][i] < 0 ? -X[t][i] : X[t][i]) > am) am = (X[t][i] < 0 ? -X[t][i] : X[t][i]);
      for (int k = 0; k < KT; k++) begin
        @(negedge clk); in_valid = 1;
        for (int i = 0; i < L; i++) in_data[i] = act_t'(X[t][k*L+i]);
        #1; while (!in_ready) begin @(negedge clk); #1; end
      end
      @(negedge clk); in_valid = 0;
      for (int k = 0; k < KT; k++) begin
        #1; while (!out_valid) begin @(negedge clk); wait_c++; #1; end
        checks++;
        if (out_absmax != 16'(am)) begin failures++; $display("absmax %0d vs %0d", out_absmax, am); end
        if (out_first != (k == 0) || out_last != (k == KT-1)) failures++;
        for (int i = 0; i < L; i++) begin
          automatic real e = (am == 0) ? 0.0 : X[t][k*L+i] * 127.0 / am;
          automatic real d = $itor(out_q[i]) - e;
          checks += 2;
          if (d > 1.0 || d < -1.0 || out_q[i] == -128) begin
            failures++; $display("t%0d i%0d q=%0d exp %f", t, k*L+i, out_q[i], e);
          end
          if (am != 0 && ((X[t][k*L+i] == am && out_q[i] != 127) || (X[t][k*L+i] == -am && out_q[i] != -127))) failures++;
        end
        @(negedge clk);
      end
      checks++;
      if (wait_c > 1) begin failures++; $display("latency %0d", wait_c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
