// tb_causal_conv1d: checks the depthwise causal convolution engine on two
// short sequences (the second starts with seq_first, so no history may leak).
// The reference is computed here in real arithmetic from the per-token INT8
// quantization (round(x*127/absmax)), the APoT weight levels, the channel
// scale and bias, followed by the exact SiLU; tolerance 6 LSB.
module tb_causal_conv1d;
  import vimq_pkg::*;
  localparam int L = 16, CT = 2, C = CT*L, TOK = 6, KS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] cfg_ctiles = CT;
  logic wp_we = 0; logic [$clog2(64/L)-1:0] wp_addr = '0; w4_t wp_w [L][KS]; wscale_t wp_scale [L]; act_t wp_bias [L];
  logic in_valid = 0, in_ready, in_seq_first = 0; act_t in_data [L];
  logic out_valid, out_ready = 1, out_last; act_t out_data [L];
  causal_conv1d #(.LANES(L), .MAX_D(64), .KS(KS)) dut (.*);

  logic [3:0] W [C][KS]; int S [C], B [C]; int X [2][TOK][C];
  real xq [2][TOK][C];
  real yref [2][TOK][C];
  function automatic real lvl(input logic [3:0] w);
    real m;
    case (w[2:0]) 0: m = 0; 1: m = 0.5; 2: m = 0.25; 3: m = 0.0625; 4: m = 0.125;
      5: m = 0.625; 6: m = 0.375; default: m = 0.1875; endcase
    return w[3] ? -m : m;
  endfunction
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < C; c++) begin
      for (int j = 0; j < KS; j++) W[c][j] = 4'($urandom);
      S[c] = $urandom_range(1000, 8000); B[c] = $urandom_range(0, 256) - 128;
    end
    for (int s = 0; s < 2; s++) for (int t = 0; t < TOK; t++) begin
      automatic int am = 0; automatic longint inv;
      for (int c = 0; c < C; c++) begin
        X[s][t][c] = $urandom_range(0, 1600) - 800;
        if ((X[s][t][c] < 0 ? -X[s][t][c] : X[s][t][c]) > am) am = (X[s][t][c] < 0 ? -X[s][t][c] : X[s][t][c]);
      end
      inv = ((longint'(127) <<< 16) + am/2) / am;
      for (int c = 0; c < C; c++) begin
        automatic longint r = (longint'(X[s][t][c]) * inv + 32768) >>> 16;
        xq[s][t][c] = $itor(r) * am / 127.0 / 256.0;
      end
    end
    for (int s = 0; s < 2; s++) for (int t = 0; t < TOK; t++) for (int c = 0; c < C; c++) begin
      automatic real v = B[c] / 256.0;
      for (int j = 0; j < KS; j++) if (t - j >= 0) v += S[c] / 4096.0 * lvl(W[c][j]) * xq[s][t-j][c];
      yref[s][t][c] = v / (1.0 + $exp(-v));
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < CT; k++) begin
      @(negedge clk); wp_we = 1; wp_addr = 2'(k);
      for (int i = 0; i < L; i++) begin
        for (int j = 0; j < KS; j++) wp_w[i][j] = W[k*L+i][j];
        wp_scale[i] = wscale_t'(S[k*L+i]); wp_bias[i] = act_t'(B[k*L+i]);
      end
    end
    @(negedge clk); wp_we = 0;
    fork
      for (int s = 0; s < 2; s++) for (int t = 0; t < TOK; t++) for (int k = 0; k < CT; k++) begin
        @(negedge clk); in_valid = 1; in_seq_first = (t == 0);
        for (int i = 0; i < L; i++) in_data[i] = act_t'(X[s][t][k*L+i]);
        #1; while (!in_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1 in_valid = 0;
      end
      for (int s = 0; s < 2; s++) for (int t = 0; t < TOK; t++) for (int k = 0; k < CT; k++) begin
        @(negedge clk); out_ready = ($urandom_range(0, 3) != 0); #1;
        while (!(out_valid && out_ready)) begin @(negedge clk); out_ready = ($urandom_range(0, 3) != 0); #1; end
        checks++;
        if (out_last != (k == CT-1)) failures++;
        for (int i = 0; i < L; i++) begin
          automatic real d = $itor(out_data[i]) / 256.0 - yref[s][t][k*L+i];
          checks++;
          if (d > 6.0/256 || d < -6.0/256) begin
            failures++; if (failures < 10) $display("s%0d t%0d c%0d got %f exp %f", s, t, k*L+i, out_data[i]/256.0, yref[s][t][k*L+i]);
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
