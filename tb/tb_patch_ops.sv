// tb_patch_ops: checks the three patch operations on numbered tiles: PASS
// keeps order, FLIP returns the sequence with the token order reversed and the
// tile order inside a token kept, CLS forwards only the tiles of the chosen
// token. out_last must mark the last tile of each output sequence.
module tb_patch_ops;
  import vimq_pkg::*;
  localparam int L = 16, CT = 2, LEN = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [1:0] cfg_mode = 0; logic [8:0] cfg_len = LEN, cfg_cls_pos = 2; logic [7:0] cfg_ctiles = CT;
  logic in_valid = 0, in_ready; act_t in_data [L];
  logic out_valid, out_ready = 1, out_last; act_t out_data [L];
  patch_ops #(.LANES(L), .MAX_TOK(8), .MAX_CH(32)) dut (.*);
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic run(input int mode, input int seqs);
    automatic int nout = (mode == 2) ? CT : LEN*CT;
    cfg_mode = 2'(mode);
    fork
      for (int s = 0; s < seqs; s++) for (int t = 0; t < LEN; t++) for (int k = 0; k < CT; k++) begin
        @(negedge clk); in_valid = 1;
        for (int i = 0; i < L; i++) in_data[i] = act_t'(s*1000 + t*100 + k*10 + i);
        #1; while (!in_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1 in_valid = 0;
      end
      for (int s = 0; s < seqs; s++) for (int o = 0; o < nout; o++) begin
        automatic int t = (mode == 1) ? LEN-1 - o/CT : (mode == 2 ? int'(cfg_cls_pos) : o/CT);
        automatic int k = o % CT;
        @(negedge clk); out_ready = $urandom_range(0, 1); #1;
        while (!(out_valid && out_ready)) begin @(negedge clk); out_ready = $urandom_range(0, 1); #1; end
        checks++;
        if (out_last != (o == nout-1)) begin failures++; $display("last m%0d o%0d", mode, o); end
        checks += L;
        for (int i = 0; i < L; i++)
          if (int'(out_data[i]) != s*1000 + t*100 + k*10 + i) begin
            failures++; if (failures < 6) $display("m%0d s%0d o%0d got %0d", mode, s, o, out_data[i]);
          end
      end
    join
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run(0, 1); run(1, 2); run(2, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
