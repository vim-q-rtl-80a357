// ssm_engine: fine-grained pipelined selective SSM engine (paper Sec. VI,
// Fig. 6). Computes, for each token t and feature channel d,
//   h_t[d][:] = exp(delta_t[d] * A[d][:]) * h_{t-1}[d][:] + delta_t[d]*u_t[d]*B_t[:]
//   Out_t[d]  = (h_t[d][:] . C_t[:] + u_t[d] * D[d]) * z_t[d]
// in three concurrently running stages: state update (ssm_update), state
// projection (ssm_projection) and fused output (ssm_output).
// Input arrives token-major, as the preceding engines produce it: first a
// per-token packet with B_t and C_t (and seq_first for the first token of a
// scan direction), then delta/u/z for channels d = 0 .. cfg_d-1. The state
// dimension N = cfg_nblk * NB is processed NB states per cycle, so a channel
// occupies cfg_nblk issue slots; the token-level recurrence is kept because
// a channel's state is revisited only cfg_d*cfg_nblk slots later.
// Defaults: NB = 16 lanes (the ViM state dimension, so one slot per channel;
// the paper does not print N_B), MAX_D = 1536 (ViM-b inner width 2*768).
// Output: one Q8.8 value per channel in order, out_last on the token's last.
// The paper's stages are decoupled by FIFOs; here they share one pipeline
// enable that drops while an output waits on out_ready (this design's
// simplification). A one-cycle bubble separates tokens (packet latch).
// Lint note: the tool reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the 'disable iff (!rst_n)' of
// the simulation assertion below, so no flop mixes reset styles.
module ssm_engine
  import vimq_pkg::*;
#(
  parameter int unsigned NB       = 16,
  parameter int unsigned MAX_D    = 1536,
  parameter int unsigned MAX_NBLK = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] cfg_d,
  input  logic [3:0]  cfg_nblk,
  // A / D buffers (A/D local buffer)
  input  logic        a_we,
  input  logic [$clog2(MAX_D*MAX_NBLK)-1:0] a_addr,
  input  act_t        a_data [NB],
  input  logic        d_we,
  input  logic [$clog2(MAX_D)-1:0] d_addr,
  input  act_t        d_data,
  // per-token B_t / C_t packet
  input  logic        bc_valid,
  output logic        bc_ready,
  input  logic        bc_seq_first,
  input  act_t        bc_b [MAX_NBLK][NB],
  input  act_t        bc_c [MAX_NBLK][NB],
  // per-channel stream
  input  logic        in_valid,
  output logic        in_ready,
  input  act_t        in_delta,
  input  act_t        in_u,
  input  act_t        in_z,
  output logic        out_valid,
  input  logic        out_ready,
  output act_t        out_data,
  output logic        out_last
);
  localparam int unsigned AW = $clog2(MAX_D*MAX_NBLK);
  logic en;
  assign en = !out_valid || out_ready;

  // ---------------- sequencer ----------------
  logic        have_bc, seq_first;
  act_t        breg [MAX_NBLK][NB];
  act_t        creg [MAX_NBLK][NB];
  logic [15:0] d_cnt;
  logic [3:0]  nb_cnt;
  logic        slot, chan_last_blk, tok_end;

  assign bc_ready      = !have_bc;
  assign chan_last_blk = (nb_cnt == cfg_nblk - 1);
  assign tok_end       = chan_last_blk && (d_cnt == cfg_d - 1);
  assign slot          = en && have_bc && in_valid;
  assign in_ready      = en && have_bc && chan_last_blk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_bc <= 1'b0; seq_first <= 1'b0; d_cnt <= '0; nb_cnt <= '0;
      for (int k = 0; k < int'(MAX_NBLK); k++)
        for (int n = 0; n < int'(NB); n++) begin breg[k][n] <= '0; creg[k][n] <= '0; end
    end else begin
      if (!have_bc && bc_valid) begin
        have_bc <= 1'b1; seq_first <= bc_seq_first; breg <= bc_b; creg <= bc_c;
      end
      if (slot) begin
        if (chan_last_blk) begin
          nb_cnt <= '0;
          if (tok_end) begin d_cnt <= '0; have_bc <= 1'b0; end
          else d_cnt <= d_cnt + 1'b1;
        end else nb_cnt <= nb_cnt + 1'b1;
      end
    end
  end

  logic [AW-1:0] slot_addr;
  assign slot_addr = AW'(32'(d_cnt) * MAX_NBLK + 32'(nb_cnt));

  // ---------------- stage 1 ----------------
  logic s1_valid, s1_bf, s1_bl, s1_tl;
  ssm_t s1_h [NB];
  act_t s1_c [NB];
  act_t s1_u, s1_z;
  logic [AW-1:0] s1_addr;
  ssm_update #(.NB(NB), .MAX_D(MAX_D), .MAX_NBLK(MAX_NBLK)) u_s1 (
    .clk, .rst_n, .en, .a_we, .a_addr, .a_data,
    .in_valid(slot), .in_addr(slot_addr), .in_delta, .in_u, .in_z,
    .in_seq_first(seq_first), .in_blk_first(nb_cnt == 0), .in_blk_last(chan_last_blk),
    .in_tok_last(tok_end), .in_b(breg[nb_cnt[$clog2(MAX_NBLK+1)-1:0]]), .in_c(creg[nb_cnt[$clog2(MAX_NBLK+1)-1:0]]),
    .out_valid(s1_valid), .out_h(s1_h), .out_c(s1_c), .out_u(s1_u), .out_z(s1_z),
    .out_addr(s1_addr), .out_blk_first(s1_bf), .out_blk_last(s1_bl), .out_tok_last(s1_tl));

  // ---------------- stage 2 ----------------
  logic s2_valid, s2_tl;
  ssm_t s2_y;
  act_t s2_u, s2_z;
  logic [15:0] s2_d;
  ssm_projection #(.NB(NB)) u_s2 (
    .clk, .rst_n, .en, .in_valid(s1_valid), .in_h(s1_h), .in_c(s1_c), .in_u(s1_u), .in_z(s1_z),
    .in_d(16'(32'(s1_addr) / MAX_NBLK)), .in_blk_first(s1_bf), .in_blk_last(s1_bl), .in_tok_last(s1_tl),
    .out_valid(s2_valid), .out_y(s2_y), .out_u(s2_u), .out_z(s2_z), .out_d(s2_d), .out_tok_last(s2_tl));

  // ---------------- stage 3 ----------------
  ssm_output #(.MAX_D(MAX_D)) u_s3 (
    .clk, .rst_n, .en, .d_we, .d_addr, .d_data,
    .in_valid(s2_valid), .in_y(s2_y), .in_u(s2_u), .in_z(s2_z), .in_d(s2_d[$clog2(MAX_D)-1:0]),
    .in_tok_last(s2_tl), .out_valid(out_valid), .out_data(out_data), .out_tok_last(out_last));

  // the recurrence needs at least two issue slots between visits of a state word
  assert property (@(posedge clk) disable iff (!rst_n) slot |-> (32'(cfg_d) * 32'(cfg_nblk) >= 2));
endmodule
