// vimq_pkg: types and constants shared by the W4A8 Vision Mamba accelerator.
//
// Number formats (this design's choice; the paper's HLS engines use their own
// types which it does not state):
//   * activations travelling between engines: signed 16-bit, 8 fractional bits (Q8.8)
//   * quantized activations: INT8, symmetric, scale = token absmax / 127
//   * weights: 4-bit APoT, bit 3 = sign, bits 2:0 = magnitude index (Table II levels)
//   * per-block weight scales and per-channel parameters: unsigned/signed 16-bit, 12 fractional bits
//   * SSM internals: signed 32-bit, 16 fractional bits
// The tile width T=16 is inferred from the paper's single-layer latency
// (192x384 layer, 197 tokens, 58,780 cycles, i.e. ~one T x T tile per cycle);
// the quantization block along the input dimension is B=32 (paper, Sec. VII-B).
package vimq_pkg;
  localparam int unsigned T        = 16;  // linear tile width / PE lanes
  localparam int unsigned QBLK     = 32;  // APoT weight quantization block (inputs)
  localparam int unsigned PRESHIFT = 8;   // F, precision-preserving pre-shift
  localparam int unsigned ACT_W    = 16;  // Q8.8 activation
  localparam int unsigned ACT_FRAC = 8;
  localparam int unsigned Q_W      = 8;   // INT8 activation
  localparam int unsigned LUT_W    = 18;  // one pre-shifted LUT entry
  localparam int unsigned SC_W     = 16;  // weight scale / smoothing factor
  localparam int unsigned SC_FRAC  = 12;
  localparam int unsigned SSM_W    = 32;  // SSM internal Q16.16
  localparam int unsigned SSM_FRAC = 16;

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [Q_W-1:0]   q_t;
  typedef logic signed [LUT_W-1:0] lut_t;
  typedef logic [3:0]              w4_t;
  typedef logic [SC_W-1:0]         wscale_t;
  typedef logic signed [SSM_W-1:0] ssm_t;

  // Post-processing activation selector of the dequantizer
  typedef enum logic [1:0] {ACT_NONE = 2'd0, ACT_RELU = 2'd1, ACT_SILU = 2'd2, ACT_SOFTPLUS = 2'd3} act_fn_e;

  // Control packet that travels with every LUT set (Fig. 3)
  typedef struct packed {
    logic [7:0]  in_grp;   // input channel group id (tile index along K)
    logic [9:0]  out_grp;  // output channel group id (tile index along N)
    logic        reset;    // first tile of a weight block: restart block sum
    logic        flush;    // last tile of a weight block: emit block sum
    logic        row_end;  // last input group of an output group
    logic        tok_last; // last packet of the token
  } ctrl_pkt_t;

  // APoT magnitude LUT index -> pre-shift amount pair, following the LUT
  // labels of Fig. 3: LUT[0]=0, LUT[1]=x<<7, LUT[2]=x<<6, LUT[3]=x<<4,
  // LUT[4]=x<<5, LUT[5..7]=LUT[1..3]+LUT[4]. Value of level i in units of 2^-F.
  function automatic int apot_level(input logic [2:0] idx);
    case (idx)
      3'd0: return 0;
      3'd1: return 128;
      3'd2: return 64;
      3'd3: return 16;
      3'd4: return 32;
      3'd5: return 160;
      3'd6: return 96;
      default: return 48;
    endcase
  endfunction

  // x * level(idx) * 2^F by shifts and adds only (same table as apot_level)
  function automatic lut_t apot_term(input q_t x, input logic [2:0] idx);
    lut_t v;
    v = lut_t'(x);
    case (idx)
      3'd0: return '0;
      3'd1: return v <<< 7;
      3'd2: return v <<< 6;
      3'd3: return v <<< 4;
      3'd4: return v <<< 5;
      3'd5: return (v <<< 7) + (v <<< 5);
      3'd6: return (v <<< 6) + (v <<< 5);
      default: return (v <<< 4) + (v <<< 5);
    endcase
  endfunction

  function automatic act_t sat_act(input logic signed [63:0] v);
    if (v > 64'sd32767) return act_t'(16'sh7fff);
    if (v < -64'sd32768) return act_t'(16'sh8000);
    return act_t'(v);
  endfunction
endpackage
