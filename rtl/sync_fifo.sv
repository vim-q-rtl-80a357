// sync_fifo: single-clock first-in first-out buffer used for the streaming
// links between engines and inside them (the LUT/control-packet FIFO of the
// linear engine, the per-token scale FIFO, the SSM inter-stage queues).
// The paper names these FIFOs but not their depth or handshake; this design
// uses a valid/ready handshake on both sides and a power-of-two depth.
// Interface: push when in_valid && in_ready; pop when out_valid && out_ready.
// Timing: an entry written in cycle t is visible at out_data in cycle t+1
// (show-ahead: out_data always shows the oldest entry).
// Lint note: the tool reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the 'disable iff (!rst_n)' of
// the simulation assertion below, so no flop mixes reset styles.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic push, pop;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;
  assign out_data = mem[rp];

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      if (push && !pop) count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  // A full FIFO never accepts and an empty one never delivers.
  assert property (@(posedge clk) disable iff (!rst_n) count <= ($clog2(DEPTH+1))'(DEPTH));
endmodule
