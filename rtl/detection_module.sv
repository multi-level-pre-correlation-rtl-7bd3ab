// detection_module: one RFI detection stage for a K-channel stream.
//
// Flagging module: the RRP estimator (with its |.|^2 front end) tracks the
// clean power of every channel, and N_DET Bernoulli power detectors, all
// calibrated by that estimate, test the same powers with their own
// threshold lambda~_d, window T and count T_d. Synchronisation module:
// aligns the waveform with the slowest detector, stretches every detector's
// flag over its window and ORs them (with the post-reset pulse) into one RFI
// flag. Blanking module: leaves, zeroes or replaces flagged samples
// according to `mode`. The RFIlet generator reports every flagged sample.
//
// Default detectors are the two of the paper's simulation and first
// experiment: strong (lambda~_d = 4, T = 3, T_d = 3) and weak
// (lambda~_d = 29/32, T = 30, T_d = 25), with lambda~ = 4 and beta = 2^-11
// for the RRP estimator. The paper does not give the settings used on
// UniBoard; these are reused at every stage.
//
// Timing: out = in delayed by 3 (RRP) + 1 (detectors) + (T_max - 1) frames
// + 1 (synchronisation) + 1 (blanking) cycles, plus SYNC_DELAY frames when
// the RRP resynchronisation is kept. `out_flag` is aligned with `out`.
module detection_module
  import rfi_pkg::*;
#(
  parameter int unsigned K                 = 248,
  parameter int unsigned BETA_SHIFT        = 11,
  parameter int unsigned LAMBDA            = 128,
  parameter int unsigned SYNC_DELAY        = 0,
  parameter int unsigned N_DET             = 2,
  parameter int unsigned T_WIN    [N_DET]  = '{3, 30},
  parameter int unsigned T_D      [N_DET]  = '{3, 25},
  parameter int unsigned LAMBDA_D [N_DET]  = '{128, 29}
) (
  input  logic             clk,
  input  logic             rst,
  input  wave_bus_t        in,
  // static configuration
  input  logic             power_reset,
  input  logic [POW_W-1:0] power_reset_value,
  input  logic [15:0]      reset_len,
  input  blank_mode_e      mode,
  input  cplx_t            gauss,          // from a Gaussian generator (mode 1)
  // synchronised, blanked waveform and its flag
  output wave_bus_t        out,
  output logic             out_flag,
  // RFIlets toward the RFI database
  output logic             rfilet_valid,
  output logic [TS_W-1:0]  rfilet_ts,
  output logic [CH_W-1:0]  rfilet_ch,
  output logic [N_DET:0]   rfilet_src
);
  rrp_bus_t         rrp;
  wave_bus_t        rrp_wave_q;
  logic [N_DET-1:0] det_valid, det_flag;

  rrp_estimator #(
    .K(K), .BETA_SHIFT(BETA_SHIFT), .LAMBDA(LAMBDA), .SYNC_DELAY(SYNC_DELAY)
  ) u_rrp (
    .clk, .rst, .in, .power_reset, .power_reset_value, .out(rrp)
  );

  for (genvar i = 0; i < N_DET; i++) begin : g_det
    bernoulli_detector #(
      .K(K), .T(T_WIN[i]), .T_D(T_D[i]), .LAMBDA_D(LAMBDA_D[i])
    ) u_det (
      .clk, .rst, .in(rrp), .flag_valid(det_valid[i]), .flag(det_flag[i])
    );
  end

  // waveform path matched to the detectors' one-cycle latency
  always_ff @(posedge clk) begin
    if (rst) rrp_wave_q.valid <= 1'b0;
    else     rrp_wave_q.valid <= rrp.valid;
    rrp_wave_q.sof <= rrp.sof;
    rrp_wave_q.ts  <= rrp.ts;
    rrp_wave_q.x   <= rrp.x;
  end

  wave_bus_t        sync_out;
  logic             sync_flag;
  logic [N_DET-1:0] sync_det;

  flag_sync #(.K(K), .N_DET(N_DET), .T_WIN(T_WIN)) u_sync (
    .clk, .rst, .in(rrp_wave_q), .det_flag,
    .rfi_reset(power_reset), .reset_len,
    .out(sync_out), .rfi_flag(sync_flag), .det_flags(sync_det)
  );

  blanking u_blank (
    .clk, .rst, .in(sync_out), .in_flag(sync_flag), .mode, .gauss,
    .out, .out_flag
  );

  rfilet_gen #(.K(K), .N_DET(N_DET)) u_rfilet (
    .clk, .rst, .valid(sync_out.valid), .sof(sync_out.sof), .ts(sync_out.ts),
    .rfi_flag(sync_flag), .det_flags(sync_det),
    .rfilet_valid, .rfilet_ts, .rfilet_ch, .rfilet_src
  );

  // every detector sees every slot the estimator emits
  assert property (@(posedge clk) disable iff (rst) det_valid == {N_DET{rrp_wave_q.valid}});

endmodule
