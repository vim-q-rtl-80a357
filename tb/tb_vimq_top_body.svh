// Shared body of the end-to-end accelerator testbenches (tb_vimq_top at
// reduced buffer capacities, tb_vimq_top_full at the default capacities).
// The including module defines the capacity localparams LMK, LMN, LWD, SMD,
// CMD, NMD, SQ, SQC, the run-time sizes DM (model width), NP (patches) and
// LNT (output tiles of the linear layer), and BP (1 = random output
// back-pressure throughout, 0 = only one initial stall, and then the linear
// layer's rate is checked), and instantiates the DUT as `dut` after this include.
//
// Scenario (DM channels, NP patches + class token, DM -> LNT*16 linear layer):
//   A  ext -> patch_embed -> norm(+residual) -> smoothing -> linear(SiLU) -> ext
//      while the SSM engine runs a 3-token scan on its own ports
//   B  ext -> patch_ops(flip) -> causal conv -> ext (backward-direction path)
//   C  ext -> patch_ops(class-token extraction) -> ext
// Every output is compared with a real-valued reference computed here.
// Mechanisms counted (each must occur): LUT replay stall, LUT FIFO full,
// output back-pressure, class-token insertion, residual add, sequence flip,
// class-token extraction, convolution history reset, SSM state reset, route
// switch, SiLU and SoftPlus-free path (none) of the dequantizer.
import vimq_pkg::*;
localparam int L = 16;
localparam int CTD = DM / L, NTOK = NP + 1, CLSP = NP / 2;     // tiles, tokens, class token
localparam int LKT = CTD, KB = (LKT + 1) / 2;                   // linear input tiles, weight blocks
localparam int SD = 8, STOK = 3;                                // SSM channels / tokens

logic clk = 0, rst_n = 0;
always #5 clk = ~clk;
int checks = 0, failures = 0;

logic [2:0] cfg_route [7];
logic ext_in_valid = 0, ext_in_ready, ext_in_last = 0; act_t ext_in_data [L];
logic ext_out_valid, ext_out_ready = 1, ext_out_last; act_t ext_out_data [L];
logic [7:0] lin_ktiles = LKT; logic [9:0] lin_ntiles = LNT; act_fn_e lin_act = ACT_SILU; logic lin_bias_en = 1;
logic lin_wload_start = 0, lin_wbeat_valid = 0, lin_wbeat_ready; logic [255:0] lin_wbeat_data = '0;
logic lin_sc_we = 0; logic [$clog2(LWD/2)-1:0] lin_sc_addr = '0; wscale_t lin_sc_data [L];
logic lin_bias_we = 0; logic [$clog2(LMN/L)-1:0] lin_bias_addr = '0; act_t lin_bias_data [L];
logic lin_stat_replay_stall, lin_stat_fifo_full;
logic [7:0] conv_ctiles = CTD; logic conv_seq_first;
logic conv_wp_we = 0; logic [$clog2(CMD/L)-1:0] conv_wp_addr = '0; w4_t conv_wp_w [L][4]; wscale_t conv_wp_scale [L]; act_t conv_wp_bias [L];
logic [7:0] norm_ctiles = CTD; logic norm_res_en = 1;
logic norm_g_we = 0; logic [$clog2(NMD/L)-1:0] norm_g_addr = '0; act_t norm_g_data [L];
act_t norm_res_in [L], norm_res_out [L];
logic [7:0] sm_ctiles = CTD; logic sm_we = 0; logic [$clog2(LMK/L)-1:0] sm_addr = '0; wscale_t sm_data [L];
logic [1:0] po_mode = 0; logic [8:0] po_len = NTOK, po_cls_pos = CLSP; logic [7:0] po_ctiles = CTD;
logic [8:0] pe_len = NP, pe_cls_pos = CLSP; logic [7:0] pe_ctiles = CTD;
logic pe_we = 0; logic [$clog2((SQ+1)*(NMD/L))-1:0] pe_addr = '0; act_t pe_data [L];
logic [15:0] ssm_d = SD; logic [3:0] ssm_nblk = 1;
logic ssm_a_we = 0; logic [$clog2(SMD)-1:0] ssm_a_addr = '0; act_t ssm_a_data [16];
logic ssm_d_we = 0; logic [$clog2(SMD)-1:0] ssm_d_addr = '0; act_t ssm_d_data = '0;
logic ssm_bc_valid = 0, ssm_bc_ready, ssm_bc_seq_first = 0; act_t ssm_bc_b [1][16]; act_t ssm_bc_c [1][16];
logic ssm_in_valid = 0, ssm_in_ready; act_t ssm_in_delta = '0, ssm_in_u = '0, ssm_in_z = '0;
logic ssm_out_valid, ssm_out_ready = 1, ssm_out_last; act_t ssm_out_data;

// ---------------- model data ----------------
int PATCH [NP][DM], POS [NTOK][DM], CLS [DM], RES [NTOK][DM], GAM [DM], SMF [DM];
logic [3:0] LW [DM][LNT*L]; int LS [KB][LNT*L]; int LB [LNT*L];
logic [3:0] CW [DM][4]; int CS [DM], CB [DM];
int XB [NTOK][DM];
int SA [SD][16], SDP [SD], SDL [STOK][SD], SU [STOK][SD], SZ [STOK][SD], SB [STOK][16], SC [STOK][16];
real refSM [NTOK][DM];       // norm + smoothing output, real-valued
int  LIN_IN [NTOK][DM];       // tiles the linear engine actually received
real refA [NTOK][LNT*L], refB [NTOK][DM], refS [STOK][SD];

int n_stall = 0, n_full = 0, n_bp = 0, n_cls_ins = 0, n_res = 0, n_flip = 0, n_cls_ext = 0,
    n_conv_reset = 0, n_ssm_reset = 0, n_route = 0, n_silu = 0;

function automatic real lvl(input logic [3:0] w);
  real m;
  case (w[2:0]) 0: m = 0; 1: m = 0.5; 2: m = 0.25; 3: m = 0.0625; 4: m = 0.125;
    5: m = 0.625; 6: m = 0.375; default: m = 0.1875; endcase
  return w[3] ? -m : m;
endfunction

// per-token INT8 quantization exactly as specified (16-bit reciprocal)
function automatic void quantize(input int x [DM], output real xq [DM], output int am);
  longint inv;
  am = 0;
  for (int i = 0; i < DM; i++) if ((x[i] < 0 ? -x[i] : x[i]) > am) am = (x[i] < 0 ? -x[i] : x[i]);
  inv = (am == 0) ? 0 : ((longint'(127) <<< 16) + am/2) / am;
  for (int i = 0; i < DM; i++) begin
    longint r = (longint'(x[i]) * inv + 32768) >>> 16;
    if (r > 127) r = 127; if (r < -127) r = -127;
    xq[i] = $itor(r);
  end
endfunction

// norm_res_in follows the norm engine's accepted tiles; conv_seq_first its tokens
int norm_tiles = 0, conv_tiles = 0, lin_tiles = 0;
longint cyc = 0, t_a0 = 0, t_a1 = 0;
always @(posedge clk) cyc <= cyc + 1;
always @(posedge clk) begin
  if (dut.snk_valid[2] && dut.snk_ready[2]) norm_tiles <= norm_tiles + 1;
  if (dut.snk_valid[1] && dut.snk_ready[1]) conv_tiles <= conv_tiles + 1;
  if (dut.snk_valid[0] && dut.snk_ready[0]) begin
    for (int i = 0; i < L; i++) LIN_IN[(lin_tiles / CTD) % NTOK][(lin_tiles % CTD) * L + i] = int'(dut.snk_data[0][i]);
    lin_tiles <= lin_tiles + 1;
  end
  if (lin_stat_replay_stall) n_stall++;
  if (lin_stat_fifo_full) n_full++;
  if (ext_out_valid && !ext_out_ready) n_bp++;
  if (dut.u_patch_embed.out_valid && dut.u_patch_embed.out_ready && dut.u_patch_embed.at_cls) n_cls_ins++;
end
always_comb begin
  for (int i = 0; i < L; i++) norm_res_in[i] = act_t'(RES[(norm_tiles / CTD) % NTOK][(norm_tiles % CTD) * L + i]);
  conv_seq_first = ((conv_tiles / CTD) % NTOK) == 0;
end

function automatic void lin_ref(input int t);
  automatic real xq [DM]; automatic int am; automatic int x [DM];
  for (int i = 0; i < DM; i++) x[i] = LIN_IN[t][i];
  quantize(x, xq, am);
  for (int o = 0; o < LNT*L; o++) begin
    automatic real acc = 0, v;
    for (int b = 0; b < KB; b++) begin
      automatic real bs = 0;
      for (int i = b*32; i < b*32+32 && i < DM; i++) bs += xq[i] * lvl(LW[i][o]);
      acc += bs * LS[b][o] / 4096.0;
    end
    v = acc * am / 127.0 / 256.0 + LB[o] / 256.0;
    refA[t][o] = v / (1.0 + $exp(-v));
  end
endfunction

task automatic send_tiles(input int data [NTOK][DM], input int ntok);
  for (int t = 0; t < ntok; t++) for (int k = 0; k < CTD; k++) begin
    @(negedge clk); ext_in_valid = 1; ext_in_last = (t == ntok-1 && k == CTD-1);
    for (int i = 0; i < L; i++) ext_in_data[i] = act_t'(data[t][k*L+i]);
    #1; while (!ext_in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 ext_in_valid = 0;
  end
endtask

task automatic set_route(input int lin, conv, norm, sm, po, pe, ext);
  cfg_route[0] = 3'(lin); cfg_route[1] = 3'(conv); cfg_route[2] = 3'(norm); cfg_route[3] = 3'(sm);
  cfg_route[4] = 3'(po); cfg_route[5] = 3'(pe); cfg_route[6] = 3'(ext);
  n_route++;
endtask

initial begin : watchdog
  repeat (2000000) @(posedge clk);
  failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
end

initial begin
  // ---------- random model ----------
  for (int i = 0; i < DM; i++) begin
    CLS[i] = $urandom_range(0, 512) - 256; GAM[i] = $urandom_range(128, 384); SMF[i] = $urandom_range(2048, 8192);
    CS[i] = $urandom_range(1000, 6000); CB[i] = $urandom_range(0, 128) - 64;
    for (int j = 0; j < 4; j++) CW[i][j] = 4'($urandom);
    for (int o = 0; o < LNT*L; o++) LW[i][o] = 4'($urandom);
    for (int p = 0; p < NP; p++) PATCH[p][i] = $urandom_range(0, 1024) - 512;
    for (int p = 0; p < NTOK; p++) begin
      POS[p][i] = $urandom_range(0, 128) - 64; RES[p][i] = $urandom_range(0, 512) - 256;
      XB[p][i] = $urandom_range(0, 1200) - 600;
    end
  end
  for (int o = 0; o < LNT*L; o++) begin
    for (int b = 0; b < KB; b++) LS[b][o] = $urandom_range(500, 3000);
    LB[o] = $urandom_range(0, 256) - 128;
  end
  for (int d = 0; d < SD; d++) begin
    SDP[d] = $urandom_range(0, 512) - 256;
    for (int n = 0; n < 16; n++) SA[d][n] = -int'($urandom_range(64, 1024));
  end
  for (int t = 0; t < STOK; t++) begin
    for (int d = 0; d < SD; d++) begin
      SDL[t][d] = $urandom_range(8, 200); SU[t][d] = $urandom_range(0, 1024) - 512; SZ[t][d] = $urandom_range(0, 512) - 256;
    end
    for (int n = 0; n < 16; n++) begin SB[t][n] = $urandom_range(0, 512) - 256; SC[t][n] = $urandom_range(0, 512) - 256; end
  end

  // ---------- references ----------
  // A: embed -> residual + RMS norm -> smoothing -> linear + SiLU
  for (int p = 0; p < NTOK; p++) begin
    automatic int e [DM]; automatic int sm [DM]; automatic real xq [DM]; automatic int am;
    automatic real ms = 0, rms;
    for (int i = 0; i < DM; i++) begin
      e[i] = POS[p][i] + ((p == CLSP) ? CLS[i] : PATCH[p < CLSP ? p : p-1][i]) + RES[p][i];
      ms += (e[i] / 256.0) ** 2;
    end
    rms = $sqrt(ms / DM + 1.0/65536);
    for (int i = 0; i < DM; i++) begin
      automatic real nv = e[i] / 256.0 / rms * GAM[i] / 256.0;
      refSM[p][i] = nv * SMF[i] / 4096.0;
    end
  end
  // B: flip -> causal conv + SiLU (token t of the output is conv over flipped sequence)
  begin
    automatic int fl [NTOK][DM]; automatic real fq [NTOK][DM];
    for (int t = 0; t < NTOK; t++) for (int i = 0; i < DM; i++) fl[t][i] = XB[NTOK-1-t][i];
    for (int t = 0; t < NTOK; t++) begin
      automatic real xq [DM]; automatic int am;
      quantize(fl[t], xq, am);
      for (int i = 0; i < DM; i++) fq[t][i] = xq[i] * am / 127.0 / 256.0;
    end
    for (int t = 0; t < NTOK; t++) for (int i = 0; i < DM; i++) begin
      automatic real v = CB[i] / 256.0;
      for (int j = 0; j < 4; j++) if (t - j >= 0) v += CS[i] / 4096.0 * lvl(CW[i][j]) * fq[t-j][i];
      refB[t][i] = v / (1.0 + $exp(-v));
    end
  end
  // SSM
  begin
    automatic real h [SD][16];
    for (int d = 0; d < SD; d++) for (int n = 0; n < 16; n++) h[d][n] = 0;
    for (int t = 0; t < STOK; t++) for (int d = 0; d < SD; d++) begin
      automatic real y = 0, de = SDL[t][d] / 256.0, u = SU[t][d] / 256.0;
      for (int n = 0; n < 16; n++) begin
        h[d][n] = $exp(de * SA[d][n] / 256.0) * h[d][n] + de * u * SB[t][n] / 256.0;
        y += h[d][n] * SC[t][n] / 256.0;
      end
      refS[t][d] = (y + u * SDP[d] / 256.0) * SZ[t][d] / 256.0;
    end
  end

  set_route(7, 7, 7, 7, 7, 7, 7);
  repeat (3) @(posedge clk); rst_n = 1;

  // ---------- parameter loading ----------
  @(negedge clk); lin_wload_start = 1; @(negedge clk); lin_wload_start = 0;
  for (int n = 0; n < LNT; n++) for (int k = 0; k < LKT; k++) begin
    automatic logic [1023:0] word;
    for (int j = 0; j < L; j++) for (int i = 0; i < L; i++) word[(j*L+i)*4 +: 4] = LW[k*L+i][n*L+j];
    for (int b = 0; b < 4; b++) begin lin_wbeat_valid = 1; lin_wbeat_data = word[b*256 +: 256]; @(negedge clk); end
  end
  lin_wbeat_valid = 0;
  for (int n = 0; n < LNT; n++) for (int b = 0; b < KB; b++) begin
    lin_sc_we = 1; lin_sc_addr = ($clog2(LWD/2))'(n*KB + b);
    lin_bias_we = (b == 0); lin_bias_addr = ($clog2(LMN/L))'(n);
    for (int j = 0; j < L; j++) begin lin_sc_data[j] = wscale_t'(LS[b][n*L+j]); lin_bias_data[j] = act_t'(LB[n*L+j]); end
    @(negedge clk);
  end
  lin_sc_we = 0; lin_bias_we = 0;
  for (int k = 0; k < CTD; k++) begin
    conv_wp_we = 1; conv_wp_addr = ($clog2(CMD/L))'(k);
    norm_g_we = 1; norm_g_addr = ($clog2(NMD/L))'(k);
    sm_we = 1; sm_addr = ($clog2(LMK/L))'(k);
    for (int i = 0; i < L; i++) begin
      for (int j = 0; j < 4; j++) conv_wp_w[i][j] = CW[k*L+i][j];
      conv_wp_scale[i] = wscale_t'(CS[k*L+i]); conv_wp_bias[i] = act_t'(CB[k*L+i]);
      norm_g_data[i] = act_t'(GAM[k*L+i]); sm_data[i] = wscale_t'(SMF[k*L+i]);
    end
    @(negedge clk);
  end
  conv_wp_we = 0; norm_g_we = 0; sm_we = 0;
  for (int p = 0; p <= SQ; p++) for (int k = 0; k < CTD; k++) begin
    pe_we = 1; pe_addr = ($clog2((SQ+1)*(NMD/L)))'(p * (NMD/L) + k);
    for (int i = 0; i < L; i++) pe_data[i] = act_t'((p == SQ) ? CLS[k*L+i] : (p < NTOK ? POS[p][k*L+i] : 0));
    @(negedge clk);
  end
  pe_we = 0;
  for (int d = 0; d < SD; d++) begin
    ssm_a_we = 1; ssm_a_addr = ($clog2(SMD))'(d); ssm_d_we = 1; ssm_d_addr = ($clog2(SMD))'(d); ssm_d_data = act_t'(SDP[d]);
    for (int n = 0; n < 16; n++) ssm_a_data[n] = act_t'(SA[d][n]);
    @(negedge clk);
  end
  ssm_a_we = 0; ssm_d_we = 0;

  // ---------- A: embed -> norm -> smooth -> linear, SSM in parallel ----------
  //           lin conv norm sm po pe ext
  set_route(4, 7, 6, 3, 7, 0, 1);
  fork
    begin
      automatic int pin [NTOK][DM];
      for (int p = 0; p < NP; p++) for (int i = 0; i < DM; i++) pin[p][i] = PATCH[p][i];
      send_tiles(pin, NP);
    end
    for (int t = 0; t < NTOK; t++) for (int g = 0; g < LNT; g++) begin
      // a long stall on the first output fills the LUT FIFO and makes the
      // next token wait for the LUT replay
      if (t == 0 && g == 0) begin ext_out_ready = 0; repeat (300) @(negedge clk); end
      @(negedge clk); ext_out_ready = !BP || ($urandom_range(0, 4) == 0); #1;
      while (!(ext_out_valid && ext_out_ready)) begin @(negedge clk); ext_out_ready = !BP || ($urandom_range(0, 4) == 0); #1; end
      checks++; n_silu++;
      if (g == 0) begin
        // norm + smoothing output, as received by the linear engine
        lin_ref(t);
        for (int i = 0; i < DM; i++) begin
          automatic real d = LIN_IN[t][i] / 256.0 - refSM[t][i];
          // norm error (2/256) times a smoothing factor of up to 2, plus rounding
          automatic real tol = 5.0/256 + 0.01 * (refSM[t][i] < 0 ? -refSM[t][i] : refSM[t][i]);
          checks++;
          if (d > tol || d < -tol) begin
            failures++; if (failures < 10) $display("norm/smooth t%0d c%0d got %f exp %f", t, i, LIN_IN[t][i]/256.0, refSM[t][i]);
          end
        end
      end
      if (g == 0 && t == NTOK/2) t_a0 = cyc;
      if (g == 0 && t == NTOK-1) t_a1 = cyc;
      n_res++;
      for (int i = 0; i < L; i++) begin
        automatic real got = $itor(ext_out_data[i]) / 256.0, e = refA[t][g*L+i];
        automatic real tol = 0.05 + 0.03 * (e < 0 ? -e : e);
        checks++;
        if (got - e > tol || e - got > tol) begin
          failures++; if (failures < 10) $display("A t%0d o%0d got %f exp %f", t, g*L+i, got, e);
        end
      end
      if (ext_out_last != (g == LNT-1)) begin failures++; $display("A last flag t%0d g%0d", t, g); end
    end
    begin : ssm_drive
      for (int t = 0; t < STOK; t++) begin
        @(negedge clk); ssm_bc_valid = 1; ssm_bc_seq_first = (t == 0);
        for (int n = 0; n < 16; n++) begin ssm_bc_b[0][n] = act_t'(SB[t][n]); ssm_bc_c[0][n] = act_t'(SC[t][n]); end
        #1; while (!ssm_bc_ready) begin @(negedge clk); #1; end
        if (t == 0) n_ssm_reset++;
        @(negedge clk); ssm_bc_valid = 0;
        for (int d = 0; d < SD; d++) begin
          ssm_in_valid = 1; ssm_in_delta = act_t'(SDL[t][d]); ssm_in_u = act_t'(SU[t][d]); ssm_in_z = act_t'(SZ[t][d]);
          #1; while (!ssm_in_ready) begin @(negedge clk); #1; end
          @(negedge clk); ssm_in_valid = 0;
        end
      end
    end
    for (int t = 0; t < STOK; t++) for (int d = 0; d < SD; d++) begin
      @(negedge clk); #1;
      while (!ssm_out_valid) begin @(negedge clk); #1; end
      checks++;
      begin
        automatic real g = $itor(ssm_out_data) / 256.0, e = refS[t][d];
        automatic real tol = 0.02 + 0.01 * (e < 0 ? -e : e);
        if (g - e > tol || e - g > tol) begin failures++; $display("SSM t%0d d%0d got %f exp %f", t, d, g, e); end
        if (ssm_out_last != (d == SD-1)) failures++;
      end
    end
  join
  @(negedge clk); ext_out_ready = 1;
  repeat (5) @(negedge clk);
  if (!BP) begin
    // steady-state rate of the linear layer: ktiles*(ntiles+1) cycles per token
    automatic real per_tok = $itor(t_a1 - t_a0) / (NTOK - 1 - NTOK/2);
    $display("linear layer %0d -> %0d: %0.1f cycles per token, %0.0f for %0d tokens (bound %0d per token)",
             DM, LNT*L, per_tok, per_tok * NTOK, NTOK, LKT*(LNT+1) + 2);
    checks++; if (per_tok > LKT*(LNT+1) + 2) begin failures++; $display("linear layer too slow"); end
  end

  // ---------- B: flip -> conv ----------
  po_mode = 2'd1;
  set_route(7, 5, 7, 7, 0, 7, 2);
  fork
    send_tiles(XB, NTOK);
    for (int t = 0; t < NTOK; t++) for (int k = 0; k < CTD; k++) begin
      @(negedge clk); ext_out_ready = ($urandom_range(0, 2) != 0); #1;
      while (!(ext_out_valid && ext_out_ready)) begin @(negedge clk); ext_out_ready = ($urandom_range(0, 2) != 0); #1; end
      checks++;
      if (k == 0) n_flip++;
      if (t == 0 && k == 0) n_conv_reset++;
      for (int i = 0; i < L; i++) begin
        automatic real d = $itor(ext_out_data[i]) / 256.0 - refB[t][k*L+i];
        checks++;
        if (d > 6.0/256 || d < -6.0/256) begin
          failures++; if (failures < 10) $display("B t%0d c%0d got %f exp %f", t, k*L+i, ext_out_data[i]/256.0, refB[t][k*L+i]);
        end
      end
    end
  join
  @(negedge clk); ext_out_ready = 1;
  repeat (5) @(negedge clk);

  // ---------- C: class-token extraction ----------
  po_mode = 2'd2;
  set_route(7, 7, 7, 7, 0, 7, 5);
  fork
    send_tiles(XB, NTOK);
    for (int k = 0; k < CTD; k++) begin
      @(negedge clk); #1;
      while (!ext_out_valid) begin @(negedge clk); #1; end
      checks++; n_cls_ext++;
      checks += L;
      for (int i = 0; i < L; i++) if (int'(ext_out_data[i]) != XB[CLSP][k*L+i]) failures++;
      if (ext_out_last != (k == CTD-1)) failures++;
    end
  join
  repeat (10) @(negedge clk);
  checks++; if (ext_out_valid) begin failures++; $display("C: extra output"); end

  // ---------- mechanism coverage ----------
  $display("stall=%0d fifo_full=%0d backpressure=%0d cls_insert=%0d residual=%0d flip=%0d cls_extract=%0d conv_reset=%0d ssm_reset=%0d route=%0d silu=%0d",
           n_stall, n_full, n_bp, n_cls_ins, n_res, n_flip, n_cls_ext, n_conv_reset, n_ssm_reset, n_route, n_silu);
  checks++; if (n_stall == 0) failures++;
  checks++; if (n_full == 0) failures++;
  checks++; if (n_bp == 0) failures++;
  checks++; if (n_cls_ins == 0) failures++;
  checks++; if (n_res == 0) failures++;
  checks++; if (n_flip == 0) failures++;
  checks++; if (n_cls_ext == 0) failures++;
  checks++; if (n_conv_reset == 0) failures++;
  checks++; if (n_ssm_reset == 0) failures++;
  checks++; if (n_route < 4) failures++;
  checks++; if (n_silu == 0) failures++;
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
