// weight_burst_loader: burst loader that fills the linear engine's weight
// buffer (paper Sec. IV "dedicated burst loaders", Sec. V-A and Fig. 3 inset 2).
//
// Weights are re-ordered off-line so that each T x T tile is a run of
// consecutive 256-bit words (one AXI data beat each). The loader packs
// T*T*4/256 beats (4 for T=16) into one tile word and writes it at the next
// sequential address of the buffer, so loading is a pure burst with no
// address arithmetic. Beat order inside a tile: beat 0 holds the lowest bits.
// A start pulse rewinds the address to 0. The AXI master itself is outside
// this design; beats arrive on a valid/ready stream that is always ready.
// Timing: one beat per cycle; a tile word is written the cycle its last beat
// is accepted.
// beat_ready is tied high: a beat is taken every cycle and written in the
// cycle its word completes, so the loader never needs to stall the burst.
module weight_burst_loader #(
  parameter int unsigned BEAT_W = 256,
  parameter int unsigned WORD_W = 1024,
  parameter int unsigned DEPTH  = 9216
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     beat_valid,
  output logic                     beat_ready,
  input  logic [BEAT_W-1:0]        beat_data,
  output logic                     wr_en,
  output logic [$clog2(DEPTH)-1:0] wr_addr,
  output logic [WORD_W-1:0]        wr_data
);
  localparam int unsigned BEATS = WORD_W / BEAT_W;
  localparam int unsigned SI = (BEATS > 2) ? $clog2(BEATS-1) : 1;   // shift register index width
  logic [BEAT_W-1:0] shreg [BEATS-1];
  logic [$clog2(BEATS+1)-1:0] beat_cnt;
  logic [$clog2(DEPTH)-1:0] addr;

  assign beat_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_cnt <= '0; addr <= '0; wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0;
      for (int i = 0; i < int'(BEATS) - 1; i++) shreg[i] <= '0;
    end else begin
      wr_en <= 1'b0;
      if (start) begin
        beat_cnt <= '0; addr <= '0;
      end else if (beat_valid) begin
        if (beat_cnt == ($clog2(BEATS+1))'(BEATS - 1)) begin
          wr_en   <= 1'b1;
          wr_addr <= addr;
          for (int i = 0; i < int'(BEATS) - 1; i++) wr_data[i*BEAT_W +: BEAT_W] <= shreg[i];
          wr_data[(BEATS-1)*BEAT_W +: BEAT_W] <= beat_data;
          beat_cnt <= '0;
          addr     <= addr + 1'b1;
        end else begin
          shreg[beat_cnt[SI-1:0]] <= beat_data;
          beat_cnt <= beat_cnt + 1'b1;
        end
      end
    end
  end
endmodule
