// rrp_estimator: robust recursive power (RRP) estimator for K channels.
//
// For every slot of channel k the estimator holds sigma~^2_k(t-1), the
// clipped-mean power of the channel, and updates it with the reordered IIR
// of the paper:
//     sigma(t) = sigma(t-1) + 2^-n * (p(t) - sigma(t-1))  if p(t) < lambda~ * sigma(t-1)
//     sigma(t) = sigma(t-1)                                otherwise (freeze)
// The 2^-n multiply is an arithmetic right shift by BETA_SHIFT. The freeze
// comparator, the two muxes (freeze, then power reset) and the K-deep state
// store (the Z^-K shift register of the figure, here a K-entry memory
// addressed by channel, which is the same thing for a fixed slot order)
// follow the RRP estimator figure. While `power_reset` is high the state of
// the slot's channel is loaded with `power_reset_value`; the paper asks for
// an initial value at least as large as the true clipped power. During the
// first frame after `rst` every channel is loaded with that value, so the
// state memory needs no clearing.
//
// The optional IIR resynchronisation delays the waveform, its power and its
// time stamp by SYNC_DELAY time samples (SYNC_DELAY*K slots), the filter
// latency tau~ = (1/beta - 1)/(1 - exp(-lambda)) of the paper. The paper
// allows it to be removed; SYNC_DELAY = 0 does so. The default 2105 is tau~
// for beta = 2^-11 and lambda = 3.59352 (lambda~ = 4).
//
// Timing: `power_calc` takes two cycles, the update one more, so `out`
// follows `in` by three cycles (plus nothing else: the resynchronisation is
// a delay of whole frames). `out.sigma` is the estimate sigma~^2(t-1) that
// was used to test this slot; `out.sof` keeps the input frame alignment.
// With SYNC_DELAY > 0, `out.valid` stays low until the delay line is full.
// Fixed point: sigma has rfi_pkg::SIG_FRAC fraction bits; LAMBDA has
// rfi_pkg::LAMBDA_FRAC fraction bits (128 = 4.0).
module rrp_estimator
  import rfi_pkg::*;
#(
  parameter int unsigned K          = 248,
  parameter int unsigned BETA_SHIFT = 11,
  parameter int unsigned LAMBDA     = 128,
  parameter int unsigned SYNC_DELAY = 2105
) (
  input  logic             clk,
  input  logic             rst,
  input  wave_bus_t        in,
  input  logic             power_reset,        // active high
  input  logic [POW_W-1:0] power_reset_value,
  output rrp_bus_t         out
);
  localparam int unsigned CW = $clog2(K+1);

  // --- |.|^2 and Z^-2 -------------------------------------------------------
  wave_bus_t        pw_bus;
  logic [POW_W-1:0] p;
  logic             power_reset_d1, power_reset_d2;

  power_calc u_power (.clk, .rst, .in, .out(pw_bus), .p);

  always_ff @(posedge clk) begin
    power_reset_d1 <= power_reset;
    power_reset_d2 <= power_reset_d1;
  end

  // --- clipped IIR -----------------------------------------------------------
  logic             run;
  logic [CW-1:0]    ch;
  logic [0:0]       row_unused;
  logic [1:0]       frames;

  slot_counter #(.K(K), .DEPTH(1)) u_slots (
    .clk, .rst, .valid(pw_bus.valid), .sof(pw_bus.sof),
    .run, .ch, .row(row_unused), .frames
  );

  logic [SIG_W-1:0] state_mem [K];
  logic [SIG_W-1:0] reset_sigma, sigma_prev, sigma_upd, sigma_new;
  logic signed [SIG_W:0] diff;
  logic             freeze, do_reset;

  always_comb begin
    reset_sigma = SIG_W'(power_reset_value) << SIG_FRAC;
    sigma_prev  = (frames == '0) ? reset_sigma : state_mem[ch];
    freeze      = over_threshold(p, sigma_prev, LAMBDA_W'(LAMBDA));
    diff        = $signed({1'b0, SIG_W'(p) << SIG_FRAC}) - $signed({1'b0, sigma_prev});
    sigma_upd   = SIG_W'($signed({1'b0, sigma_prev}) + (diff >>> BETA_SHIFT));
    do_reset    = power_reset_d2 || (frames == '0);
    sigma_new   = do_reset ? reset_sigma : (freeze ? sigma_prev : sigma_upd);
  end

  always_ff @(posedge clk) begin
    if (pw_bus.valid && run) state_mem[ch] <= sigma_new;
  end

  rrp_bus_t core_q;
  always_ff @(posedge clk) begin
    if (rst) core_q.valid <= 1'b0;
    else     core_q.valid <= pw_bus.valid && run;
    core_q.sof   <= pw_bus.sof;
    core_q.ts    <= pw_bus.ts;
    core_q.x     <= pw_bus.x;
    core_q.p     <= p;
    core_q.sigma <= sigma_prev;
  end

  // --- IIR resynchronisation: Z^-(K*tau~) on x, p and ts ----------------------
  if (SYNC_DELAY == 0) begin : g_nosync
    assign out = core_q;
  end else begin : g_sync
    localparam int unsigned DEPTH = K * SYNC_DELAY;
    localparam int unsigned AW    = $clog2(DEPTH);
    typedef struct packed {
      logic [TS_W-1:0]  ts;
      cplx_t            x;
      logic [POW_W-1:0] p;
    } dly_t;

    dly_t          dly_mem [DEPTH];
    logic [AW-1:0] wptr;
    logic          full;
    dly_t          old;

    assign old = dly_mem[wptr];

    always_ff @(posedge clk) begin
      if (rst) begin
        wptr <= '0;
        full <= 1'b0;
      end else if (core_q.valid) begin
        wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
        if (wptr == AW'(DEPTH - 1)) full <= 1'b1;
      end
      if (core_q.valid) dly_mem[wptr] <= '{ts: core_q.ts, x: core_q.x, p: core_q.p};
    end

    always_comb begin
      out       = core_q;
      out.valid = core_q.valid && full;
      out.ts    = old.ts;
      out.x     = old.x;
      out.p     = old.p;
    end
  end

endmodule
