// oriented_accumulator: flag-steered spectral integration ("oriented
// accumulation").
//
// Each final channel's power |x|^2 is routed, by the RFI decision of its
// sample, to one of two accumulators: clean samples (flag 0) to sum0,
// flagged samples (flag 1) to sum1. Over an integration of M time samples
// (M = M0 + M1 per channel, M constant) nothing is discarded. At the end of
// each integration the module emits, per channel, the two averages
// (1/M0)*sum0 and (1/M1)*sum1 (the "powerlets") and the counts M0 and M1,
// so the user may keep or drop the flagged part. An average whose count is
// 0 is output as 0.
//
// Both sums and the flagged count live in K-entry memories. An integration
// starts at the first frame after reset; its first frame overwrites the
// memories (no clearing needed), its last frame produces the outputs. The
// divisions are written as plain `/` operators.
//
// Timing: the power takes two cycles, the accumulation one more; the
// powerlet of channel k appears three cycles after channel k of the last
// frame of the integration. `pl_ts` is the time stamp of its first frame.
// M is not given by the paper; the default 1024 (about 0.33 s at the
// 200/64 kHz channel rate) is this design's choice.
module oriented_accumulator
  import rfi_pkg::*;
#(
  parameter int unsigned K = 15872,
  parameter int unsigned M = 1024
) (
  input  logic                      clk,
  input  logic                      rst,
  input  wave_bus_t                 in,
  input  logic                      in_flag,
  output logic                      pl_valid,
  output logic [CH_W-1:0]           pl_ch,
  output logic [TS_W-1:0]           pl_ts,
  output logic [POW_W-1:0]          pl_mean0,   // clean average
  output logic [POW_W-1:0]          pl_mean1,   // flagged average
  output logic [$clog2(M+1)-1:0]    pl_m0,
  output logic [$clog2(M+1)-1:0]    pl_m1
);
  localparam int unsigned ACC_W = POW_W + $clog2(M);
  localparam int unsigned MW    = $clog2(M+1);
  localparam int unsigned CW    = $clog2(K+1);
  localparam int unsigned RW    = $clog2(M+1);
  localparam int unsigned FW    = $clog2(M+2);

  // |.|^2, flag delayed to match
  wave_bus_t        pw;
  logic [POW_W-1:0] p;
  logic             flag_d1, flag_d2;

  power_calc u_power (.clk, .rst, .in, .out(pw), .p);

  always_ff @(posedge clk) begin
    flag_d1 <= in_flag;
    flag_d2 <= flag_d1;
  end

  logic          run;
  logic [CW-1:0] ch;
  logic [RW-1:0] row;
  logic [FW-1:0] frames_unused;

  slot_counter #(.K(K), .DEPTH(M)) u_slots (
    .clk, .rst, .valid(pw.valid), .sof(pw.sof), .run, .ch, .row, .frames(frames_unused)
  );

  logic [ACC_W-1:0] sum0_mem [K];
  logic [ACC_W-1:0] sum1_mem [K];
  logic [MW-1:0]    cnt1_mem [K];
  logic [TS_W-1:0]  start_ts_q;

  logic             first, last, take;
  logic [ACC_W-1:0] sum0_new, sum1_new;
  logic [MW-1:0]    cnt1_new, cnt0_new;

  assign take  = pw.valid && run;
  assign first = (row == '0);
  assign last  = (row == RW'(M - 1));

  always_comb begin
    sum0_new = (first ? '0 : sum0_mem[ch]) + (flag_d2 ? '0 : ACC_W'(p));
    sum1_new = (first ? '0 : sum1_mem[ch]) + (flag_d2 ? ACC_W'(p) : '0);
    cnt1_new = (first ? '0 : cnt1_mem[ch]) + MW'(flag_d2);
    cnt0_new = MW'(M) - cnt1_new;
  end

  always_ff @(posedge clk) begin
    if (take) begin
      sum0_mem[ch] <= sum0_new;
      sum1_mem[ch] <= sum1_new;
      cnt1_mem[ch] <= cnt1_new;
      if (first && pw.sof) start_ts_q <= pw.ts;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) pl_valid <= 1'b0;
    else     pl_valid <= take && last;
    pl_ch    <= CH_W'(ch);
    pl_ts    <= (first && pw.sof) ? pw.ts : start_ts_q;
    pl_m0    <= cnt0_new;
    pl_m1    <= cnt1_new;
    pl_mean0 <= (cnt0_new == '0) ? '0 : POW_W'(sum0_new / ACC_W'(cnt0_new));
    pl_mean1 <= (cnt1_new == '0) ? '0 : POW_W'(sum1_new / ACC_W'(cnt1_new));
  end

endmodule
