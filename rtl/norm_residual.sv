// norm_residual: residual summation and RMS normalization engine (paper
// Sec. IV "Auxiliary Engines", Fig. 1 Norm and residual adds).
//
// For each token of D = ctiles*T channels:
//   r'      = x + r                               (residual summation, optional)
//   out[c]  = r'[c] / sqrt(mean(r'^2) + eps) * gamma[c]
// Both r' (the new residual stream) and the normalized token are emitted.
// The paper names the engine only; RMSNorm is the normalization Vision Mamba
// uses, and all arithmetic here is this design's: the sum of squares is
// gathered while the token is buffered, mean = sumsq / D by one divide,
// sqrt by a 32-step restoring integer square root, 1/rms by one divide
// (Q16.16), and one multiply by 1/rms and one by gamma per channel.
// eps is one LSB of the Q16.16 mean (about 1.5e-5, close to the usual 1e-5).
// Formats: x, r, gamma, outputs Q8.8. Timing per token: ctiles cycles in,
// about 36 cycles for the statistics, ctiles cycles out (one tile per cycle
// under out_ready). Input is refused while a token is being emitted.
module norm_residual
  import vimq_pkg::*;
#(
  parameter int unsigned LANES = vimq_pkg::T,
  parameter int unsigned MAX_D = 768
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] cfg_ctiles,
  input  logic       cfg_res_en,        // add the residual input
  input  logic       g_we,
  input  logic [$clog2(MAX_D/LANES)-1:0] g_addr,
  input  act_t       g_data [LANES],
  input  logic       in_valid,
  output logic       in_ready,
  input  act_t       in_x [LANES],
  input  act_t       in_r [LANES],
  output logic       out_valid,
  input  logic       out_ready,
  output act_t       out_norm [LANES],
  output act_t       out_res [LANES],
  output logic       out_last
);
  localparam int unsigned CT = MAX_D / LANES;
  localparam int unsigned IW = (CT > 1) ? $clog2(CT) : 1;   // buffer index width
  typedef enum logic [2:0] {S_IN, S_MEAN, S_SQRT, S_INV, S_OUT} state_e;
  state_e state;

  act_t gbuf [CT][LANES];
  act_t tbuf [CT][LANES];
  always_ff @(posedge clk) begin
    if (g_we) gbuf[g_addr] <= g_data;
  end

  // residual add and per-tile sum of squares
  act_t        rsum [LANES];
  logic [47:0] tile_sq;
  always_comb begin
    tile_sq = '0;
    for (int i = 0; i < int'(LANES); i++) begin
      rsum[i] = cfg_res_en ? sat_act(64'(in_x[i]) + 64'(in_r[i])) : in_x[i];
      tile_sq = tile_sq + 48'(32'(rsum[i]) * 32'(rsum[i]));       // Q16.16
    end
  end

  logic [7:0]  idx;
  logic [IW-1:0] bi;
  assign bi = idx[IW-1:0];
  logic [47:0] sumsq;
  logic [63:0] rad, root, rem;   // restoring square root state
  logic [5:0]  it;
  logic [31:0] inv_rms;          // Q16.16

  assign in_ready = (state == S_IN);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) tbuf[bi] <= rsum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN; idx <= '0; sumsq <= '0; rad <= '0; root <= '0; rem <= '0; it <= '0; inv_rms <= '0;
    end else begin
      case (state)
        S_IN: if (in_valid) begin
          sumsq <= (idx == 0) ? tile_sq : sumsq + tile_sq;
          if (idx == cfg_ctiles - 1) begin idx <= '0; state <= S_MEAN; end
          else idx <= idx + 1'b1;
        end
        S_MEAN: begin
          // mean in Q16.16 plus eps, scaled by 2^16 so the root is Q16.16 too
          rad   <= ((64'(sumsq) / (64'(cfg_ctiles) * LANES)) + 64'd1) << 16;
          root  <= '0; rem <= '0; it <= '0;
          state <= S_SQRT;
        end
        S_SQRT: begin
          logic [63:0] r2, trial;
          r2    = (rem << 2) | 64'(rad[63:62]);
          trial = (root << 2) | 64'd1;
          rad   <= rad << 2;
          if (r2 >= trial) begin rem <= r2 - trial; root <= (root << 1) | 64'd1; end
          else begin rem <= r2; root <= root << 1; end
          it <= it + 1'b1;
          if (it == 6'd31) state <= S_INV;
        end
        S_INV: begin
          inv_rms <= 32'((64'd1 << 32) / ((root == 0) ? 64'd1 : root));
          state   <= S_OUT;
        end
        default: if (out_ready) begin
          if (idx == cfg_ctiles - 1) begin idx <= '0; state <= S_IN; end
          else idx <= idx + 1'b1;
        end
      endcase
    end
  end

  always_comb begin
    for (int i = 0; i < int'(LANES); i++) begin
      logic signed [63:0] p;
      p = (64'(tbuf[bi][i]) * $signed({32'd0, inv_rms})) >>> 16;   // Q8.8 normalized
      p = (p * 64'(gbuf[bi][i])) >>> ACT_FRAC;
      out_norm[i] = sat_act(p);
      out_res[i]  = tbuf[bi][i];
    end
  end
  assign out_valid = (state == S_OUT);
  assign out_last  = (idx == cfg_ctiles - 1);
endmodule
