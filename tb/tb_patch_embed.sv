// tb_patch_embed: feeds LEN numbered patch tokens and checks that LEN+1
// tokens come out, the class token (plus its position embedding) at
// cfg_cls_pos and every patch token shifted past it, each with the position
// embedding of its output slot added; random back-pressure; repeated twice.
module tb_patch_embed;
  import vimq_pkg::*;
  localparam int L = 16, CT = 2, LEN = 5, MT = 8, MD = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [8:0] cfg_len = LEN, cfg_cls_pos = 2; logic [7:0] cfg_ctiles = CT;
  logic pe_we = 0; logic [$clog2((MT+1)*(MD/L))-1:0] pe_addr = '0; act_t pe_data [L];
  logic in_valid = 0, in_ready; act_t in_data [L];
  logic out_valid, out_ready = 1, out_last; act_t out_data [L];
  patch_embed #(.LANES(L), .MAX_TOK(MT), .MAX_D(MD)) dut (.*);
  int POS [MT+1][CT][L];
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int p = 0; p <= MT; p++) for (int k = 0; k < CT; k++) begin
      @(negedge clk); pe_we = 1; pe_addr = 5'(p*(MD/L) + k);
      for (int i = 0; i < L; i++) begin POS[p][k][i] = $urandom_range(0, 200) - 100; pe_data[i] = act_t'(POS[p][k][i]); end
    end
    @(negedge clk); pe_we = 0;
    fork
      for (int s = 0; s < 2; s++) for (int t = 0; t < LEN; t++) for (int k = 0; k < CT; k++) begin
        @(negedge clk); in_valid = 1;
        for (int i = 0; i < L; i++) in_data[i] = act_t'(t*1000 + k*100 + i);
        #1; while (!in_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1 in_valid = 0;
      end
      for (int s = 0; s < 2; s++) for (int p = 0; p <= LEN; p++) for (int k = 0; k < CT; k++) begin
        @(negedge clk); out_ready = $urandom_range(0, 1); #1;
        while (!(out_valid && out_ready)) begin @(negedge clk); out_ready = $urandom_range(0, 1); #1; end
        checks++;
        if (out_last != (p == LEN && k == CT-1)) failures++;
        for (int i = 0; i < L; i++) begin
          automatic int e = POS[p][k][i] + ((p == 2) ? POS[MT][k][i] : ((p < 2 ? p : p-1)*1000 + k*100 + i));
          checks++;
          if (int'(out_data[i]) != e) begin failures++; if (failures < 6) $display("p%0d k%0d i%0d got %0d exp %0d", p, k, i, out_data[i], e); end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
