// rfi_pkg: types and constants shared by the pre-correlation RFI flagging
// pipeline.
//
// Every stage of the pipeline carries its data on a time-multiplexed serial
// stream: one slot per clock when `valid` is high, channels 0..K-1 of one
// time sample in order, `sof` (start of frame) marking channel 0. Each slot
// carries a time stamp `ts`, the index of the time sample at the input of
// the first stage, so that flags from different stages can be related.
//
// Fixed-point conventions (choices of this implementation, the paper gives
// no word widths):
//   * samples are complex, 16-bit signed I and Q;
//   * instantaneous power p = I^2 + Q^2 is unsigned, 32 bits;
//   * the robust power estimate sigma~^2 carries SIG_FRAC fractional bits so
//     that the 2^-n update step of the IIR does not truncate to zero;
//   * threshold scaling factors (lambda~, lambda~_d) are unsigned with
//     LAMBDA_FRAC = 5 fractional bits, so 29/32 and 4 are both exact.
package rfi_pkg;

  localparam int unsigned DATA_W      = 16;
  localparam int unsigned POW_W       = 2 * DATA_W;       // |x|^2 width
  localparam int unsigned SIG_FRAC    = 16;               // fraction bits of sigma~^2
  localparam int unsigned SIG_W       = POW_W + SIG_FRAC; // sigma~^2 width
  localparam int unsigned LAMBDA_FRAC = 5;
  localparam int unsigned LAMBDA_W    = 9;                // up to 15.97
  localparam int unsigned TS_W        = 32;
  localparam int unsigned CH_W        = 16;               // channel index (K <= 65535)

  typedef struct packed {
    logic signed [DATA_W-1:0] re;
    logic signed [DATA_W-1:0] im;
  } cplx_t;

  // Waveform stream (Avalon-ST like: valid + start of frame + payload).
  typedef struct packed {
    logic              valid;
    logic              sof;
    logic [TS_W-1:0]   ts;
    cplx_t             x;
  } wave_bus_t;

  // Output bus of the RRP estimator (Fig. 11, serial output data bus).
  typedef struct packed {
    logic              valid;
    logic              sof;
    logic [TS_W-1:0]   ts;
    cplx_t             x;
    logic [POW_W-1:0]  p;
    logic [SIG_W-1:0]  sigma;   // sigma~^2(t-1) of this slot's channel
  } rrp_bus_t;

  // Blanking mode, encoded as the data inputs of the mode mux of Fig. 10.
  typedef enum logic [1:0] {
    BLANK_ZERO    = 2'd0,
    BLANK_GAUSS   = 2'd1,
    BLANK_THROUGH = 2'd2
  } blank_mode_e;

  // Threshold test of Fig. 11 and Fig. 12: p >= lambda * sigma, with both
  // sides brought to SIG_FRAC + LAMBDA_FRAC fraction bits.
  function automatic logic over_threshold(logic [POW_W-1:0] p,
                                          logic [SIG_W-1:0] sigma,
                                          logic [LAMBDA_W-1:0] lambda);
    logic [SIG_W+LAMBDA_W-1:0] eta;
    logic [SIG_W+LAMBDA_W-1:0] p_scaled;
    eta      = sigma * lambda;
    p_scaled = (SIG_W+LAMBDA_W)'(p) << (SIG_FRAC + LAMBDA_FRAC);
    return p_scaled >= eta;
  endfunction

endpackage
