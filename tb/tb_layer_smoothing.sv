// tb_layer_smoothing: random tokens times random per-channel smoothing
// factors (Q4.12); each output must be round(x*s/4096) saturated to 16 bits,
// with the factor chosen by the channel tile index, under random back-pressure.
module tb_layer_smoothing;
  import vimq_pkg::*;
  localparam int L = 16, CT = 3, TOK = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] cfg_ctiles = CT;
  logic s_we = 0; logic [$clog2(64/L)-1:0] s_addr = '0; wscale_t s_data [L];
  logic in_valid = 0, in_ready; act_t in_data [L];
  logic out_valid, out_ready = 1, out_last; act_t out_data [L];
  layer_smoothing #(.LANES(L), .MAX_D(64)) dut (.*);
  int S [CT][L]; int X [TOK][CT][L];
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int k = 0; k < CT; k++) for (int i = 0; i < L; i++) S[k][i] = $urandom_range(0, 40000);
    for (int t = 0; t < TOK; t++) for (int k = 0; k < CT; k++) for (int i = 0; i < L; i++) X[t][k][i] = $urandom_range(0, 20000) - 10000;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < CT; k++) begin
      @(negedge clk); s_we = 1; s_addr = 2'(k);
      for (int i = 0; i < L; i++) s_data[i] = wscale_t'(S[k][i]);
    end
    @(negedge clk); s_we = 0;
    fork
      for (int t = 0; t < TOK; t++) for (int k = 0; k < CT; k++) begin
        @(negedge clk); in_valid = 1;
        for (int i = 0; i < L; i++) in_data[i] = act_t'(X[t][k][i]);
        #1; while (!in_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1 in_valid = 0;
      end
      for (int t = 0; t < TOK; t++) for (int k = 0; k < CT; k++) begin
        @(negedge clk); out_ready = $urandom_range(0, 1); #1;
        while (!(out_valid && out_ready)) begin @(negedge clk); out_ready = $urandom_range(0, 1); #1; end
        checks++;
        if (out_last != (k == CT-1)) failures++;
        for (int i = 0; i < L; i++) begin
          automatic longint e = (longint'(X[t][k][i]) * S[k][i] + 2048) >>> 12;
          if (e > 32767) e = 32767; if (e < -32768) e = -32768;
          checks++;
          if (longint'(out_data[i]) != e) begin failures++; if (failures < 5) $display("got %0d exp %0d", out_data[i], e); end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
