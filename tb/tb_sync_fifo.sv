// tb_sync_fifo: pushes a numbered sequence through the FIFO with random push
// and pop pressure and checks order, no loss, no duplication, and the full /
// empty flags against a model count.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = 0, out_data; logic [2:0] count;
  sync_fifo #(.W(16), .DEPTH(4)) dut (.*);
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int nxt_in = 0, nxt_out = 0, model = 0, fulls = 0, cyc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    while (nxt_out < 300) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0); in_data = 16'(nxt_in);
      cyc++;
      out_ready = (cyc > 100 && cyc < 120) ? 1'b0 : ($urandom_range(0, 2) != 0);
      #1;
      checks++;
      if (int'(count) != model || in_ready != (model < 4) || out_valid != (model > 0)) failures++;
      if (!in_ready) fulls++;
      if (out_valid && out_ready) begin
        if (out_data != 16'(nxt_out)) begin failures++; $display("got %0d exp %0d", out_data, nxt_out); end
        nxt_out++; model--;
      end
      if (in_valid && in_ready) begin nxt_in++; model++; end
    end
    checks++; if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
