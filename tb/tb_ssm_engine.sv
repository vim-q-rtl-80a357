// tb_ssm_engine: self-checking test of the three-stage SSM engine. A random
// selective-scan problem (delta > 0, A < 0, random u, z, B, C, D) is run for
// two sequences (the second restarts the state with seq_first) and the outputs
// are compared with a real-valued reference of
//   h = exp(delta*A)*h + delta*u*B,  out = (h.C + u*D) * z
// using the exact exponential. Also checks the issue rate (one channel per
// cycle for N = NB) and that random output back-pressure loses nothing.
module tb_ssm_engine;
  import vimq_pkg::*;
  localparam int NB = 16, MD = 16, NBLK = 2, D = 12, TOK = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] cfg_d = D; logic [3:0] cfg_nblk = NBLK;
  logic a_we = 0; logic [$clog2(MD*NBLK)-1:0] a_addr = '0; act_t a_data [NB];
  logic d_we = 0; logic [$clog2(MD)-1:0] d_addr = '0; act_t d_data = '0;
  logic bc_valid = 0, bc_ready, bc_seq_first = 0; act_t bc_b [NBLK][NB]; act_t bc_c [NBLK][NB];
  logic in_valid = 0, in_ready; act_t in_delta = '0, in_u = '0, in_z = '0;
  logic out_valid, out_ready = 1, out_last; act_t out_data;

  ssm_engine #(.NB(NB), .MAX_D(MD), .MAX_NBLK(NBLK)) dut (.*);

  int A [D][NBLK*NB]; int Dp [D];
  int dl [2][TOK][D], uu [2][TOK][D], zz [2][TOK][D], BB [2][TOK][NBLK*NB], CC [2][TOK][NBLK*NB];
  real h [D][NBLK*NB];
  real yref [2][TOK][D];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    int t0, t1, got_n;
    for (int d = 0; d < D; d++) begin
      Dp[d] = $urandom_range(0, 512) - 256;
      for (int n = 0; n < NBLK*NB; n++) A[d][n] = -int'($urandom_range(32, 1024));
    end
    for (int s = 0; s < 2; s++) for (int t = 0; t < TOK; t++) begin
      for (int d = 0; d < D; d++) begin
        dl[s][t][d] = $urandom_range(4, 200); uu[s][t][d] = $urandom_range(0, 1024) - 512;
        zz[s][t][d] = $urandom_range(0, 512) - 256;
      end
      for (int n = 0; n < NBLK*NB; n++) begin
        BB[s][t][n] = $urandom_range(0, 512) - 256; CC[s][t][n] = $urandom_range(0, 512) - 256;
      end
    end
    // reference
    for (int s = 0; s < 2; s++) begin
      for (int d = 0; d < D; d++) for (int n = 0; n < NBLK*NB; n++) h[d][n] = 0;
      for (int t = 0; t < TOK; t++) for (int d = 0; d < D; d++) begin
        automatic real y = 0, de = dl[s][t][d] / 256.0, u = uu[s][t][d] / 256.0;
        for (int n = 0; n < NBLK*NB; n++) begin
          h[d][n] = $exp(de * A[d][n] / 256.0) * h[d][n] + de * u * BB[s][t][n] / 256.0;
          y += h[d][n] * CC[s][t][n] / 256.0;
        end
        yref[s][t][d] = (y + u * Dp[d] / 256.0) * zz[s][t][d] / 256.0;
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int d = 0; d < D; d++) begin
      for (int k = 0; k < NBLK; k++) begin
        a_we = 1; a_addr = ($clog2(MD*NBLK))'(d*NBLK + k);
        for (int n = 0; n < NB; n++) a_data[n] = act_t'(A[d][k*NB+n]);
        @(negedge clk);
      end
      a_we = 0; d_we = 1; d_addr = ($clog2(MD))'(d); d_data = act_t'(Dp[d]); @(negedge clk); d_we = 0;
    end
    t0 = cyc; got_n = 0;
    fork
      for (int s = 0; s < 2; s++) for (int t = 0; t < TOK; t++) begin
        bc_valid = 1; bc_seq_first = (t == 0);
        for (int k = 0; k < NBLK; k++) for (int n = 0; n < NB; n++) begin
          bc_b[k][n] = act_t'(BB[s][t][k*NB+n]); bc_c[k][n] = act_t'(CC[s][t][k*NB+n]);
        end
        #1; while (!bc_ready) begin @(negedge clk); #1; end
        @(negedge clk); bc_valid = 0;
        for (int d = 0; d < D; d++) begin
          in_valid = 1; in_delta = act_t'(dl[s][t][d]); in_u = act_t'(uu[s][t][d]); in_z = act_t'(zz[s][t][d]);
          #1; while (!in_ready) begin @(negedge clk); #1; end
          @(negedge clk); in_valid = 0;
        end
        // the next token's B/C packet may be latched only after this token's
        // channels were all issued; wait for the engine to request it
      end
      begin
        for (int s = 0; s < 2; s++) for (int t = 0; t < TOK; t++) for (int d = 0; d < D; d++) begin
          @(negedge clk); out_ready = (s == 1) ? ($urandom_range(0, 2) != 0) : 1'b1; #1;
          while (!(out_valid && out_ready)) begin
            @(negedge clk); out_ready = (s == 1) ? ($urandom_range(0, 2) != 0) : 1'b1; #1;
          end
          checks++; got_n++;
          begin
            automatic real g = $itor(out_data) / 256.0, e = yref[s][t][d];
            automatic real tol = 0.02 + 0.01 * (e < 0 ? -e : e);
            checks++;
            if (g - e > tol || e - g > tol) begin
              failures++;
              if (failures < 10) $display("s%0d t%0d d%0d got %f exp %f", s, t, d, g, e);
            end
            if (out_last != (d == D-1)) failures++;
          end
          if (s == 0 && t == TOK-1 && d == D-1) begin
            t1 = cyc; checks++;
            // one channel per NBLK cycles, plus one latch bubble per token
            if (t1 - t0 > TOK * (D*NBLK + 3) + 10) begin failures++; $display("slow: %0d", t1 - t0); end
            $display("sequence 0: %0d cycles", t1 - t0);
          end
        end
      end
    join
    @(negedge clk); out_ready = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
