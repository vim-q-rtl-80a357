// exp_approx: exponential approximation for the SSM decay gate
// A_bar = exp(delta * A) (paper Sec. VI-B, Fig. 6b "Exp Approximation").
//
// The paper names an optimised exponential approximation but not its method;
// this one is this design's. For x <= 0 (delta > 0 and A < 0 make the
// argument non-positive; positive inputs are clamped to 0):
//   t = x * log2(e) = -(i) + f,  i integer >= 0, f in [0, 1)
//   2^f ~= 1 + f * (0.6565 + 0.3435 f)   (exact at f = 0, 1/2 and 1,
//                                          error below 0.3 %)
//   exp(x) = 2^f >> i
// Input: signed Q16.16. Output: unsigned Q1.16 in (0, 1] (65536 = 1.0).
// Purely combinational; the caller registers the result.
module exp_approx (
  input  logic signed [31:0] x,
  output logic        [16:0] y
);
  localparam logic [16:0] LOG2E = 17'd94548;   // log2(e) * 2^16
  localparam logic [16:0] C1    = 17'd43024;   // 0.6565 * 2^16
  localparam logic [16:0] C2    = 17'd22512;   // 0.3435 * 2^16

  logic signed [49:0] t;
  logic [15:0] f;
  logic [33:0] ip;
  logic [33:0] poly;
  logic [16:0] pow_f;

  always_comb begin
    if (x >= 0) begin
      t = '0;
    end else begin
      t = (50'(x) * $signed({33'd0, LOG2E})) >>> 16;   // Q.16, negative
    end
    f    = t[15:0];                                  // fractional part of t (t = -ip + f)
    ip   = 34'(-(t >>> 16));                         // -floor(t)
    poly = 34'(C1) + ((34'(C2) * 34'(f)) >> 16);     // 0.6565 + 0.3435 f
    pow_f = 17'(34'h10000 + ((poly * 34'(f)) >> 16)); // 2^f, Q1.16
    y = (ip >= 34'd17) ? 17'd0 : (pow_f >> ip[4:0]);
  end
endmodule
