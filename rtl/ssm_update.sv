// ssm_update: stage 1 of the SSM engine, the state space update engine
// (paper Sec. VI-B, Fig. 6b).
//
// Each issue slot carries one feature channel d of token t and one block of
// NB states. The scalars delta_t[d] and u_t[d] are turned into (delta*u) once
// and broadcast, with delta, to NB parallel lanes. Lane n computes
//   A_bar[n] = exp(delta * A[d][n])     (exp_approx)
//   Bu[n]    = (delta*u) * B_t[n]
//   h[n]     = h_prev[d][n] * A_bar[n] + Bu[n]        (one MAC per cycle)
// A is held on chip (loaded once per layer through a_we); the hidden state
// of every (d, state block) is kept on chip in a state memory addressed by
// d*nblk+block, so h never leaves the engine (the paper keeps it in
// distributed register files). in_seq_first makes h_prev read as 0 (first
// token of a scan direction).
// Formats: delta, u, A, B in Q8.8; h and outputs in Q16.16; A_bar Q1.16.
// Timing: 3-cycle pipeline advancing on en; a new (d, block) every cycle.
// The same state word is read again only d*nblk slots later, so the
// read-modify-write needs cfg_d*cfg_nblk >= 2.
module ssm_update
  import vimq_pkg::*;
#(
  parameter int unsigned NB       = 16,
  parameter int unsigned MAX_D    = 1536,
  parameter int unsigned MAX_NBLK = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  // A load port: one NB-wide block per write, address d*MAX_NBLK+block
  input  logic       a_we,
  input  logic [$clog2(MAX_D*MAX_NBLK)-1:0] a_addr,
  input  act_t       a_data [NB],
  // issue slot
  input  logic       in_valid,
  input  logic [$clog2(MAX_D*MAX_NBLK)-1:0] in_addr,
  input  act_t       in_delta,
  input  act_t       in_u,
  input  act_t       in_z,
  input  logic       in_seq_first,
  input  logic       in_blk_first,
  input  logic       in_blk_last,
  input  logic       in_tok_last,
  input  act_t       in_b [NB],
  input  act_t       in_c [NB],
  // to stage 2
  output logic       out_valid,
  output ssm_t       out_h [NB],
  output act_t       out_c [NB],
  output act_t       out_u,
  output act_t       out_z,
  output logic [$clog2(MAX_D*MAX_NBLK)-1:0] out_addr,
  output logic       out_blk_first,
  output logic       out_blk_last,
  output logic       out_tok_last
);
  localparam int unsigned DEPTH = MAX_D * MAX_NBLK;
  typedef logic [NB*SSM_W-1:0] hword_t;

  act_t   amem [DEPTH][NB];
  hword_t hmem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we) amem[a_addr] <= a_data;
  end

  // ---- P0: broadcast delta, delta*u; delta*A per lane; state read ----
  logic  v0, sf0, bf0, bl0, tl0;
  ssm_t  du0;
  ssm_t  da0 [NB];
  act_t  b0 [NB], c0 [NB];
  act_t  u0, z0;
  logic [$clog2(DEPTH)-1:0] addr0;
  hword_t hrd;
  always_ff @(posedge clk) begin
    if (en && in_valid) hrd <= hmem[in_addr];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; sf0 <= 1'b0; bf0 <= 1'b0; bl0 <= 1'b0; tl0 <= 1'b0;
      du0 <= '0; u0 <= '0; z0 <= '0; addr0 <= '0;
      for (int n = 0; n < int'(NB); n++) begin da0[n] <= '0; b0[n] <= '0; c0[n] <= '0; end
    end else if (en) begin
      v0 <= in_valid;
      if (in_valid) begin
        sf0 <= in_seq_first; bf0 <= in_blk_first; bl0 <= in_blk_last; tl0 <= in_tok_last;
        du0 <= ssm_t'(in_delta) * ssm_t'(in_u);           // Q16.16
        u0 <= in_u; z0 <= in_z; addr0 <= in_addr;
        b0 <= in_b; c0 <= in_c;
        for (int n = 0; n < int'(NB); n++)
          da0[n] <= ssm_t'(in_delta) * ssm_t'(amem[in_addr][n]);  // Q16.16
      end
    end
  end

  // ---- P1: exp approximation, B_bar*u, previous state ----
  logic [16:0] abar_c [NB];
  for (genvar g = 0; g < int'(NB); g++) begin : g_exp
    exp_approx u_exp (.x(da0[g]), .y(abar_c[g]));
  end

  logic  v1, bf1, bl1, tl1;
  logic [16:0] abar1 [NB];
  ssm_t  bu1 [NB], hp1 [NB];
  act_t  c1 [NB];
  act_t  u1, z1;
  logic [$clog2(DEPTH)-1:0] addr1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; bf1 <= 1'b0; bl1 <= 1'b0; tl1 <= 1'b0; u1 <= '0; z1 <= '0; addr1 <= '0;
      for (int n = 0; n < int'(NB); n++) begin abar1[n] <= '0; bu1[n] <= '0; hp1[n] <= '0; c1[n] <= '0; end
    end else if (en) begin
      v1 <= v0;
      if (v0) begin
        bf1 <= bf0; bl1 <= bl0; tl1 <= tl0; u1 <= u0; z1 <= z0; addr1 <= addr0; c1 <= c0;
        for (int n = 0; n < int'(NB); n++) begin
          logic signed [47:0] p;
          p = 48'(du0) * 48'(b0[n]);
          bu1[n]   <= ssm_t'(p >>> ACT_FRAC);
          abar1[n] <= abar_c[n];
          hp1[n]   <= sf0 ? '0 : ssm_t'(hrd[n*SSM_W +: SSM_W]);
        end
      end
    end
  end

  // ---- P2: MAC and state write-back ----
  hword_t hnew;
  always_comb begin
    for (int n = 0; n < int'(NB); n++) begin
      logic signed [49:0] m;
      m = 50'(hp1[n]) * $signed({33'd0, abar1[n]});
      hnew[n*SSM_W +: SSM_W] = ssm_t'(m >>> 16) + bu1[n];
    end
  end
  always_ff @(posedge clk) begin
    if (en && v1) hmem[addr1] <= hnew;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_u <= '0; out_z <= '0; out_addr <= '0;
      out_blk_first <= 1'b0; out_blk_last <= 1'b0; out_tok_last <= 1'b0;
      for (int n = 0; n < int'(NB); n++) begin out_h[n] <= '0; out_c[n] <= '0; end
    end else if (en) begin
      out_valid <= v1;
      if (v1) begin
        for (int n = 0; n < int'(NB); n++) out_h[n] <= ssm_t'(hnew[n*SSM_W +: SSM_W]);
        out_c <= c1; out_u <= u1; out_z <= z1; out_addr <= addr1;
        out_blk_first <= bf1; out_blk_last <= bl1; out_tok_last <= tl1;
      end
    end
  end
endmodule
