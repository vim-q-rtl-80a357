// tb_norm_residual: checks residual summation and RMS normalization. Random
// tokens and residuals (with and without the residual add) go in; the new
// residual must be exactly x + r and the normalized output must match
// (x+r)/sqrt(mean((x+r)^2)+eps)*gamma within 2 LSB + 0.5 %.
module tb_norm_residual;
  import vimq_pkg::*;
  localparam int L = 16, CT = 3, C = CT*L, TOK = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] cfg_ctiles = CT; logic cfg_res_en = 1;
  logic g_we = 0; logic [$clog2(64/L)-1:0] g_addr = '0; act_t g_data [L];
  logic in_valid = 0, in_ready; act_t in_x [L], in_r [L];
  logic out_valid, out_ready = 1, out_last; act_t out_norm [L], out_res [L];
  norm_residual #(.LANES(L), .MAX_D(64)) dut (.*);
  int G [C], X [TOK][C], R [TOK][C];
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < C; c++) G[c] = $urandom_range(64, 512);
    for (int t = 0; t < TOK; t++) for (int c = 0; c < C; c++) begin
      X[t][c] = $urandom_range(0, 2000) - 1000; R[t][c] = $urandom_range(0, 2000) - 1000;
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < CT; k++) begin
      @(negedge clk); g_we = 1; g_addr = 2'(k);
      for (int i = 0; i < L; i++) g_data[i] = act_t'(G[k*L+i]);
    end
    @(negedge clk); g_we = 0;
    for (int t = 0; t < TOK; t++) begin
      automatic real ms = 0, rms;
      automatic int sres [C];
      cfg_res_en = (t != 2);
      for (int c = 0; c < C; c++) begin
        sres[c] = X[t][c] + (cfg_res_en ? R[t][c] : 0); ms += (sres[c] / 256.0) ** 2;
      end
      rms = $sqrt(ms / C + 1.0/65536);
      for (int k = 0; k < CT; k++) begin
        @(negedge clk); in_valid = 1;
        for (int i = 0; i < L; i++) begin in_x[i] = act_t'(X[t][k*L+i]); in_r[i] = act_t'(R[t][k*L+i]); end
        #1; while (!in_ready) begin @(negedge clk); #1; end
      end
      @(negedge clk); in_valid = 0;
      for (int k = 0; k < CT; k++) begin
        #1; while (!out_valid) begin @(negedge clk); #1; end
        checks++;
        if (out_last != (k == CT-1)) failures++;
        for (int i = 0; i < L; i++) begin
          automatic real e = sres[k*L+i] / 256.0 / rms * G[k*L+i] / 256.0;
          automatic real d = $itor(out_norm[i]) / 256.0 - e;
          automatic real tol = 2.0/256 + 0.005 * (e < 0 ? -e : e);
          checks += 2;
          if (int'(out_res[i]) != sres[k*L+i]) failures++;
          if (d > tol || d < -tol) begin
            failures++; if (failures < 10) $display("t%0d c%0d got %f exp %f", t, k*L+i, out_norm[i]/256.0, e);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
