// tb_exp_approx: sweeps the exponential approximation over [-20, 0] (and a
// positive input, which must clamp to 1.0) and compares with $exp: absolute
// error below 0.4 % of full scale plus 2 LSB.
module tb_exp_approx;
  int checks = 0, failures = 0;
  logic signed [31:0] x; logic [16:0] y;
  exp_approx dut (.x, .y);
  initial begin
    for (int i = 0; i <= 4000; i++) begin
      automatic real xr = -20.0 * i / 4000.0;
      automatic real e, got;
      x = 32'($rtoi(xr * 65536.0));
      #1;
      e = $exp($itor(x) / 65536.0); got = $itor(y) / 65536.0;
      checks++;
      if (got - e > 0.004 || e - got > 0.004) begin
        failures++; if (failures < 10) $display("x=%f got %f exp %f", xr, got, e);
      end
    end
    x = 32'sd70000; #1; checks++; if (y != 17'd65536) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
