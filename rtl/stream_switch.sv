// stream_switch: run-time configurable tile-stream interconnect between the
// accelerator's engines (paper Sec. IV: engines exchange 1 x T tiles through
// FIFOs and are configured at run time).
//
// Each sink k takes its tiles from source cfg_route[k] (NONE = no source),
// so a layer can be chained through several engines on chip (for example
// norm -> linear, or patch_ops flip -> causal conv) or sent to and from the
// external memory ports. Every source has a small FIFO at its output, the
// decoupling FIFOs of the paper. A source may feed only one sink (checked by
// an assertion); the route must only change while the streams are idle.
// The paper does not describe how its engines are wired; this switch is this
// design's stand-in for that interconnect.
// Timing: FIFO adds one cycle; full throughput of one tile per cycle.
// Lint note: the tool reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the 'disable iff (!rst_n)' of
// the simulation assertion below, so no flop mixes reset styles.
module stream_switch
  import vimq_pkg::*;
#(
  parameter int unsigned LANES = vimq_pkg::T,
  parameter int unsigned NSRC  = 7,
  parameter int unsigned NSNK  = 7,
  parameter int unsigned FDEPTH = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [2:0] cfg_route [NSNK],       // source index per sink, 7 = none
  input  logic src_valid [NSRC],
  output logic src_ready [NSRC],
  input  act_t src_data  [NSRC][LANES],
  input  logic src_last  [NSRC],
  output logic snk_valid [NSNK],
  input  logic snk_ready [NSNK],
  output act_t snk_data  [NSNK][LANES],
  output logic snk_last  [NSNK]
);
  localparam int unsigned W = LANES * ACT_W + 1;
  logic         f_valid [NSRC];
  logic         f_ready [NSRC];
  logic [W-1:0] f_in  [NSRC];
  logic [W-1:0] f_out [NSRC];

  for (genvar s = 0; s < int'(NSRC); s++) begin : g_src
    always_comb begin
      for (int i = 0; i < int'(LANES); i++) f_in[s][i*ACT_W +: ACT_W] = src_data[s][i];
      f_in[s][W-1] = src_last[s];
    end
    logic [$clog2(FDEPTH+1)-1:0] cnt;
    sync_fifo #(.W(W), .DEPTH(FDEPTH)) u_fifo (
      .clk, .rst_n, .in_valid(src_valid[s]), .in_ready(src_ready[s]), .in_data(f_in[s]),
      .out_valid(f_valid[s]), .out_ready(f_ready[s]), .out_data(f_out[s]), .count(cnt));
  end

  always_comb begin
    for (int s = 0; s < int'(NSRC); s++) f_ready[s] = 1'b0;
    for (int k = 0; k < int'(NSNK); k++) begin
      snk_valid[k] = 1'b0;
      snk_last[k]  = 1'b0;
      for (int i = 0; i < int'(LANES); i++) snk_data[k][i] = '0;
      for (int s = 0; s < int'(NSRC); s++) begin
        if (cfg_route[k] == 3'(s)) begin
          snk_valid[k] = f_valid[s];
          snk_last[k]  = f_out[s][W-1];
          for (int i = 0; i < int'(LANES); i++) snk_data[k][i] = f_out[s][i*ACT_W +: ACT_W];
          f_ready[s]   = snk_ready[k];
        end
      end
    end
  end

  // one sink per source
  for (genvar a = 0; a < int'(NSNK); a++) begin : g_chk
    for (genvar b = a + 1; b < int'(NSNK); b++) begin : g_pair
      assert property (@(posedge clk) disable iff (!rst_n)
        (cfg_route[a] == 3'd7) || (cfg_route[a] != cfg_route[b]));
    end
  end
endmodule
