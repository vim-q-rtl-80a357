// tb_linear_engine: self-checking test of the unified W4A8 linear engine
// (and through it the weight burst loader, PE lanes, block scaling and
// dequantization). Random Q8.8 tokens, random APoT weights, block scales and
// biases; the expected outputs are computed here in real arithmetic from the
// quantization rules (INT8 = round(x*127/absmax) using the 16-bit reciprocal,
// APoT levels 0, 1/2, 1/4, 1/16, 1/8, 5/8, 3/8, 3/16 by index) and compared
// within a small tolerance; SiLU and SoftPlus are compared with the exact
// functions. Also checks the tile rate: per token ktiles collect cycles plus
// ntiles*ktiles replay cycles plus a short pipeline.
module tb_linear_engine;
  import vimq_pkg::*;
  localparam int L = 16;
  localparam int MAXK = 96, MAXN = 64, WD = 24;
  localparam int KT = 6, NT = 2, KB = 3, NTOK = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] cfg_ktiles = KT; logic [9:0] cfg_ntiles = NT;
  act_fn_e cfg_act = ACT_NONE; logic cfg_bias_en = 1;
  logic wload_start = 0, wbeat_valid = 0, wbeat_ready; logic [255:0] wbeat_data = '0;
  logic sc_we = 0; logic [$clog2(WD/2)-1:0] sc_addr = '0; wscale_t sc_data [L];
  logic bias_we = 0; logic [$clog2(MAXN/L)-1:0] bias_addr = '0; act_t bias_data [L];
  logic in_valid = 0, in_ready; act_t in_data [L];
  logic out_valid, out_ready = 1; act_t out_data [L]; logic [9:0] out_grp; logic out_last;
  logic st_stall, st_full;

  linear_engine #(.LANES(L), .MAX_K(MAXK), .MAX_N(MAXN), .WDEPTH(WD)) dut (
    .clk, .rst_n, .cfg_ktiles, .cfg_ntiles, .cfg_act, .cfg_bias_en,
    .wload_start, .wbeat_valid, .wbeat_ready, .wbeat_data, .sc_we, .sc_addr, .sc_data,
    .bias_we, .bias_addr, .bias_data, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .out_grp, .out_last,
    .stat_replay_stall(st_stall), .stat_fifo_full(st_full));

  logic [3:0] W [KT*L][NT*L];
  int         S [KB][NT*L];
  int         BI [NT*L];
  int         X [NTOK][KT*L];
  real        yref [NTOK][NT*L];

  function automatic real lvl(input logic [3:0] w);
    real m;
    case (w[2:0]) 0: m = 0; 1: m = 0.5; 2: m = 0.25; 3: m = 0.0625; 4: m = 0.125;
      5: m = 0.625; 6: m = 0.375; default: m = 0.1875; endcase
    return w[3] ? -m : m;
  endfunction

  function automatic real fn(input real v, input act_fn_e f);
    case (f)
      ACT_RELU: return v > 0 ? v : 0;
      ACT_SILU: return v / (1.0 + $exp(-v));
      ACT_SOFTPLUS: return $ln(1.0 + $exp(v));
      default: return v;
    endcase
  endfunction

  task automatic compute_ref(input act_fn_e f);
    for (int t = 0; t < NTOK; t++) begin
      int am = 0; longint inv; int q [KT*L];
      for (int i = 0; i < KT*L; i++) if ((X[t][i] < 0 ? -X[t][i] : X[t][i]) > am) am = (X[t][i] < 0 ? -X[t][i] : X[t][i]);
      inv = (am == 0) ? 0 : ((longint'(127) <<< 16) + am/2) / am;
      for (int i = 0; i < KT*L; i++) begin
        longint r = (longint'(X[t][i]) * inv + 32768) >>> 16;
        q[i] = (r > 127) ? 127 : (r < -127 ? -127 : int'(r));
      end
      for (int o = 0; o < NT*L; o++) begin
        real acc = 0;
        for (int b = 0; b < KB; b++) begin
          real bs = 0;
          for (int i = b*32; i < b*32+32 && i < KT*L; i++) bs += q[i] * lvl(W[i][o]);
          acc += bs * S[b][o] / 4096.0;
        end
        yref[t][o] = fn(acc * am / 127.0 / 256.0 + BI[o] / 256.0, f);
      end
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_stall = 0;
  always @(posedge clk) if (st_stall) n_stall++;

  task automatic run_tokens(input act_fn_e f, input real tol, input bit bp);
    int ot = 0, og = 0, t0, t1;
    cfg_act = f;
    compute_ref(f);
    t0 = cyc;
    fork
      begin
        for (int t = 0; t < NTOK; t++)
          for (int k = 0; k < KT; k++) begin
            @(negedge clk);
            in_valid = 1;
            for (int i = 0; i < L; i++) in_data[i] = act_t'(X[t][k*L+i]);
            #1; while (!in_ready) begin @(negedge clk); #1; end
            @(posedge clk); #1 in_valid = 0;
          end
      end
      begin
        while (ot < NTOK) begin
          @(negedge clk);
          out_ready = bp ? ($urandom_range(0, 3) != 0) : 1'b1;
          #1;
          if (out_valid && out_ready) begin
            checks++;
            if (out_grp != 10'(og)) begin failures++; $display("grp mismatch %0d %0d", out_grp, og); end
            for (int j = 0; j < L; j++) begin
              real got = $itor(out_data[j]) / 256.0;
              real d = got - yref[ot][og*L+j];
              checks++;
              if (d > tol || d < -tol) begin
                failures++;
                if (failures < 10) $display("tok %0d out %0d got %f exp %f", ot, og*L+j, got, yref[ot][og*L+j]);
              end
            end
            if (out_last != (og == NT-1)) failures++;
            if (og == NT-1) begin og = 0; ot++; end else og++;
          end
        end
        @(negedge clk); out_ready = 1;
      end
    join
    t1 = cyc;
    checks++;
    if (!bp && (t1 - t0) > NTOK * (NT*KT + KT + 2) + 12) begin
      failures++; $display("too slow: %0d cycles", t1 - t0);
    end
    $display("act %0d: %0d cycles for %0d tokens", f, t1 - t0, NTOK);
  endtask

  initial begin
    for (int i = 0; i < KT*L; i++) for (int o = 0; o < NT*L; o++) W[i][o] = 4'($urandom);
    for (int b = 0; b < KB; b++) for (int o = 0; o < NT*L; o++) S[b][o] = $urandom_range(256, 3000);
    for (int o = 0; o < NT*L; o++) BI[o] = $urandom_range(0, 512) - 256;
    for (int t = 0; t < NTOK; t++) for (int i = 0; i < KT*L; i++) X[t][i] = $urandom_range(0, 1200) - 600;
    X[1][5] = 9000;   // an outlier token
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    // weights: tiles n-major, k-minor, 4 beats each
    wload_start <= 1; @(posedge clk); wload_start <= 0;
    for (int n = 0; n < NT; n++) for (int k = 0; k < KT; k++) begin
      logic [1023:0] word;
      for (int j = 0; j < L; j++) for (int i = 0; i < L; i++) word[(j*L+i)*4 +: 4] = W[k*L+i][n*L+j];
      for (int b = 0; b < 4; b++) begin
        wbeat_valid <= 1; wbeat_data <= word[b*256 +: 256]; @(posedge clk);
      end
    end
    wbeat_valid <= 0;
    for (int n = 0; n < NT; n++) for (int b = 0; b < KB; b++) begin
      sc_we <= 1; sc_addr <= ($clog2(WD/2))'(n*KB + b);
      for (int j = 0; j < L; j++) sc_data[j] <= wscale_t'(S[b][n*L+j]);
      @(posedge clk);
    end
    sc_we <= 0;
    for (int n = 0; n < NT; n++) begin
      bias_we <= 1; bias_addr <= ($clog2(MAXN/L))'(n);
      for (int j = 0; j < L; j++) bias_data[j] <= act_t'(BI[n*L+j]);
      @(posedge clk);
    end
    bias_we <= 0;
    repeat (3) @(posedge clk);
    run_tokens(ACT_NONE, 0.03, 0);
    run_tokens(ACT_RELU, 0.03, 1);
    run_tokens(ACT_SILU, 0.06, 0);
    run_tokens(ACT_SOFTPLUS, 0.06, 1);
    checks++; if (n_stall == 0) begin failures++; $display("replay stall never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
