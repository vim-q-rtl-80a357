// ssm_output: stage 3 of the SSM engine, fused output generation
// (paper Sec. VI-D, Fig. 6a): Out_t[d] = (y_t[d] + u_t[d] * D[d]) * z_t[d].
//
// The skip term, residual add and gating multiply are fused in one
// registered step. D (one value per channel) is held in an on-chip buffer
// loaded through d_we. Formats: y Q16.16, u/z/D/Out Q8.8 (Out saturated).
// Timing: result one cycle after the input slot, advancing on en.
module ssm_output
  import vimq_pkg::*;
#(
  parameter int unsigned MAX_D = 1536
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic d_we,
  input  logic [$clog2(MAX_D)-1:0] d_addr,
  input  act_t d_data,
  input  logic in_valid,
  input  ssm_t in_y,
  input  act_t in_u,
  input  act_t in_z,
  input  logic [$clog2(MAX_D)-1:0] in_d,
  input  logic in_tok_last,
  output logic out_valid,
  output act_t out_data,
  output logic out_tok_last
);
  act_t dmem [MAX_D];
  always_ff @(posedge clk) begin
    if (d_we) dmem[d_addr] <= d_data;
  end

  logic signed [63:0] g;
  always_comb begin
    logic signed [63:0] s;
    s = 64'(in_y) + 64'(in_u) * 64'(dmem[in_d]);        // Q16.16
    g = (s * 64'(in_z)) >>> (SSM_FRAC);                 // Q8.8
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0; out_tok_last <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data     <= sat_act(g);
        out_tok_last <= in_tok_last;
      end
    end
  end
endmodule
