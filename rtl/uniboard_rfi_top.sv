// uniboard_rfi_top: multi-level pre-correlation RFI flagging and oriented
// accumulation for K0 beamlets.
//
// The input is a time-multiplexed stream of K0 complex beamlets (248 from
// EMBRACE, 200 kHz each). It passes three detection stages with two 8-bin
// maximally decimated channelisers between them:
//     detection(K0) -> pfb8 -> detection(8*K0) -> pfb8 -> detection(64*K0)
// so each stage watches the data at a finer frequency and coarser time
// resolution (200 kHz, 25 kHz and 3.125 kHz channels for K0 = 248). Every
// stage reports its flagged samples as RFIlets. The RFI decision flags a
// final channel sample when its own stage or any stage above flagged a
// sample it was made from, and that decision steers the power of the final
// channels into a clean or a flagged accumulator (oriented accumulation).
//
// Static configuration per stage: power reset request and value of the RRP
// estimator, length of the post-reset flag, blanking mode and the sample of
// an external Gaussian generator (used only in Gaussian blanking mode).
// Note that a stage in zero mode passes zeros to the next stage, which then
// sees those zeros as clean samples; go-through is the mode for analysis.
//
// The RRP resynchronisation delay is removed at every stage (SYNC_DELAY 0),
// which the paper allows for slowly varying noise power; with it the delay
// lines would need K*tau~ entries (33 million at the last stage).
// Input time stamps must count time samples and start at a multiple of 64
// only if the whole first block is wanted; the channelisers drop the samples
// before their first block boundary.
module uniboard_rfi_top
  import rfi_pkg::*;
#(
  parameter int unsigned K0         = 248,
  parameter int unsigned BETA_SHIFT = 11,
  parameter int unsigned LAMBDA     = 128,
  parameter int unsigned ACC_M      = 1024,
  parameter int unsigned HIST       = 64
) (
  input  logic                   clk,
  input  logic                   rst,
  input  wave_bus_t              beamlet_in,
  // static configuration, one entry per stage
  input  logic [2:0]             power_reset,
  input  logic [POW_W-1:0]       power_reset_value [3],
  input  logic [15:0]            reset_len         [3],
  input  blank_mode_e            mode              [3],
  input  cplx_t                  gauss             [3],
  // RFIlets, one stream per stage, toward the RFI database
  output logic [2:0]             rfilet_valid,
  output logic [TS_W-1:0]        rfilet_ts         [3],
  output logic [CH_W-1:0]        rfilet_ch         [3],
  output logic [2:0]             rfilet_src        [3],
  // final-stage decision (for monitoring)
  output logic                   decision_valid,
  output logic                   decision_flag,
  output logic [2:0]             decision_src,
  // powerlets
  output logic                   pl_valid,
  output logic [CH_W-1:0]        pl_ch,
  output logic [TS_W-1:0]        pl_ts,
  output logic [POW_W-1:0]       pl_mean0,
  output logic [POW_W-1:0]       pl_mean1,
  output logic [$clog2(ACC_M+1)-1:0] pl_m0,
  output logic [$clog2(ACC_M+1)-1:0] pl_m1
);
  localparam int unsigned K1 = 8 * K0;
  localparam int unsigned K2 = 8 * K1;

  wave_bus_t s0_out, p1_out, s1_out, p2_out, s2_out, dec_out;
  logic      s0_flag, s1_flag, s2_flag;

  detection_module #(.K(K0), .BETA_SHIFT(BETA_SHIFT), .LAMBDA(LAMBDA), .SYNC_DELAY(0)) u_det0 (
    .clk, .rst, .in(beamlet_in),
    .power_reset(power_reset[0]), .power_reset_value(power_reset_value[0]),
    .reset_len(reset_len[0]), .mode(mode[0]), .gauss(gauss[0]),
    .out(s0_out), .out_flag(s0_flag),
    .rfilet_valid(rfilet_valid[0]), .rfilet_ts(rfilet_ts[0]),
    .rfilet_ch(rfilet_ch[0]), .rfilet_src(rfilet_src[0])
  );

  pfb8 #(.K(K0), .TS_SHIFT(0)) u_pfb1 (.clk, .rst, .in(s0_out), .out(p1_out));

  detection_module #(.K(K1), .BETA_SHIFT(BETA_SHIFT), .LAMBDA(LAMBDA), .SYNC_DELAY(0)) u_det1 (
    .clk, .rst, .in(p1_out),
    .power_reset(power_reset[1]), .power_reset_value(power_reset_value[1]),
    .reset_len(reset_len[1]), .mode(mode[1]), .gauss(gauss[1]),
    .out(s1_out), .out_flag(s1_flag),
    .rfilet_valid(rfilet_valid[1]), .rfilet_ts(rfilet_ts[1]),
    .rfilet_ch(rfilet_ch[1]), .rfilet_src(rfilet_src[1])
  );

  pfb8 #(.K(K1), .TS_SHIFT(3)) u_pfb2 (.clk, .rst, .in(s1_out), .out(p2_out));

  detection_module #(.K(K2), .BETA_SHIFT(BETA_SHIFT), .LAMBDA(LAMBDA), .SYNC_DELAY(0)) u_det2 (
    .clk, .rst, .in(p2_out),
    .power_reset(power_reset[2]), .power_reset_value(power_reset_value[2]),
    .reset_len(reset_len[2]), .mode(mode[2]), .gauss(gauss[2]),
    .out(s2_out), .out_flag(s2_flag),
    .rfilet_valid(rfilet_valid[2]), .rfilet_ts(rfilet_ts[2]),
    .rfilet_ch(rfilet_ch[2]), .rfilet_src(rfilet_src[2])
  );

  rfi_decision #(.K0(K0), .K1(K1), .K2(K2), .BLK_LOG2(6), .HIST(HIST)) u_decision (
    .clk, .rst,
    .s0_valid(s0_out.valid), .s0_sof(s0_out.sof), .s0_ts(s0_out.ts), .s0_flag(s0_flag),
    .s1_valid(s1_out.valid), .s1_sof(s1_out.sof), .s1_ts(s1_out.ts), .s1_flag(s1_flag),
    .s2(s2_out), .s2_flag(s2_flag),
    .out(dec_out), .out_flag(decision_flag), .out_src(decision_src)
  );

  assign decision_valid = dec_out.valid;

  oriented_accumulator #(.K(K2), .M(ACC_M)) u_acc (
    .clk, .rst, .in(dec_out), .in_flag(decision_flag),
    .pl_valid, .pl_ch, .pl_ts, .pl_mean0, .pl_mean1, .pl_m0, .pl_m1
  );

endmodule
