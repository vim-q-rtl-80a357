// tb_dequant_postproc: checks the dequantizer and activation post-processing.
// Random accumulators and token scales are dequantized (acc*absmax/127/2^20
// plus bias, in Q8.8); the result is compared with the exact value for no
// activation and ReLU (within 1.5 LSB) and with the exact SiLU and SoftPlus
// (within 5 LSB, the half-table sampling step). Negative, positive and
// saturating inputs all occur.
module tb_dequant_postproc;
  import vimq_pkg::*;
  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 1; act_fn_e cfg_act = ACT_NONE; logic cfg_bias_en = 1;
  logic in_valid = 0; logic signed [47:0] in_acc [L]; logic [15:0] in_absmax = 0; act_t in_bias [L];
  ctrl_pkt_t in_ctrl = '0;
  logic out_valid; act_t out_y [L]; ctrl_pkt_t out_ctrl;
  dequant_postproc #(.LANES(L)) dut (.*);
  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      automatic real e [L];
      automatic act_fn_e f = act_fn_e'(r % 4);
      @(negedge clk);
      cfg_act = f; in_valid = 1; in_absmax = 16'($urandom_range(50, 3000));
      for (int i = 0; i < L; i++) begin
        automatic real v;
        in_acc[i] = 48'(longint'($urandom_range(0, 2000000)) * ((r < 36) ? 256 : 4096) - ((r < 36) ? 256000000 : 64'd4096000000));
        in_bias[i] = act_t'($urandom_range(0, 512) - 256);
        v = $itor(in_acc[i]) * in_absmax / 127.0 / 1048576.0 / 256.0 + in_bias[i] / 256.0;
        if (v > 127.99) v = 127.99; if (v < -128.0) v = -128.0;
        case (f)
          ACT_RELU: e[i] = v > 0 ? v : 0;
          ACT_SILU: e[i] = v / (1.0 + $exp(-v));
          ACT_SOFTPLUS: e[i] = $ln(1.0 + $exp(v));
          default: e[i] = v;
        endcase
      end
      @(negedge clk); in_valid = 0;
      @(posedge clk); #1;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < L; i++) begin
        automatic real tol = (f == ACT_SILU || f == ACT_SOFTPLUS) ? 5.0/256 : 1.5/256;
        automatic real d = $itor(out_y[i]) / 256.0 - e[i];
        checks++;
        if (d > tol || d < -tol) begin
          failures++; if (failures < 10) $display("r%0d f%0d got %f exp %f", r, f, out_y[i]/256.0, e[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
