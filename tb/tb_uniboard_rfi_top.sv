// tb_uniboard_rfi_top: end-to-end run of the three-stage flagging pipeline
// and oriented accumulation with K0 = 2 beamlets (so 16 and 128 channels in
// the later stages), beta = 2^-6 and M = 4 spectra per integration.
//
// Stimulus: Gaussian-like noise on both beamlets; a 3-sample strong pulse on
// beamlet 1 (time samples 8000-8002); a weak tone on beamlet 0 during time
// samples 12000-19999, at -9 dB INR at the input, centred on final channel
// 42 (second-stage bin 5, third-stage bin 2), which only the finer stages can
// see. Stage 2 blanks in zero mode, stages 0 and 1 go through.
//
// Checks:
//  * the final decision of every final sample equals its own stage-2 flag OR
//    any stage-0 / stage-1 flag of its parent channels in the same 64-sample
//    block, both rebuilt from the RFIlet streams;
//  * flagged final samples are zero (zero mode), others are not all zero;
//  * every powerlet (averages and counts) matches the testbench's own
//    accumulation of the decided final stream over M spectra;
//  * the pulse is reported by stage 0 with the strong detector, the tone by
//    stage 2 in channel 42;
//  * each mechanism happens at least once: RRP freeze at every stage, strong
//    and weak detector, post-reset flag, inheritance from stage 0 and from
//    stage 1, own stage-2 flag, clean and flagged accumulation, zero
//    blanking.
module tb_uniboard_rfi_top;
  import rfi_pkg::*;
  localparam int K0 = 2, K1 = 8 * K0, K2 = 8 * K1, M = 4;
  localparam int NT = 64 * 420;               // input time samples
  localparam int PULSE_T = 8000, TONE_T0 = 12000, TONE_T1 = 20000;
  localparam int TONE_CH = 2 * K1 + 5 * K0 + 0;

  logic clk = 0, rst = 1;
  wave_bus_t beamlet_in;
  logic [2:0] power_reset = '0;
  logic [POW_W-1:0] prv [3];
  logic [15:0] rlen [3];
  blank_mode_e mode [3];
  cplx_t gauss [3];
  logic [2:0] rfilet_valid;
  logic [TS_W-1:0] rfilet_ts [3];
  logic [CH_W-1:0] rfilet_ch [3];
  logic [2:0] rfilet_src [3];
  logic decision_valid, decision_flag;
  logic [2:0] decision_src;
  logic pl_valid;
  logic [CH_W-1:0] pl_ch;
  logic [TS_W-1:0] pl_ts;
  logic [POW_W-1:0] pl_mean0, pl_mean1;
  logic [$clog2(M+1)-1:0] pl_m0, pl_m1;

  uniboard_rfi_top #(.K0(K0), .BETA_SHIFT(6), .ACC_M(M)) u_dut (
    .clk, .rst, .beamlet_in, .power_reset, .power_reset_value(prv), .reset_len(rlen),
    .mode, .gauss, .rfilet_valid, .rfilet_ts, .rfilet_ch, .rfilet_src,
    .decision_valid, .decision_flag, .decision_src,
    .pl_valid, .pl_ch, .pl_ts, .pl_mean0, .pl_mean1, .pl_m0, .pl_m1);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_freeze [3];
  int n_strong = 0, n_weak = 0, n_reset = 0, n_inh0 = 0, n_inh1 = 0, n_own = 0;
  int n_clean_acc = 0, n_flag_acc = 0, n_zeroed = 0, n_nonzero = 0, n_pl = 0, n_dec = 0;
  int n_pulse = 0, n_tone = 0;

  // flagged samples per stage, keyed by {ts, ch}
  bit flagged [3][longint];

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int gauss_amp(int scale);
    int s = 0;
    for (int i = 0; i < 4; i++) s += int'($urandom_range(0, 2 * scale)) - scale;
    return s / 2;
  endfunction

  initial begin
    // noise variance per component 4*3000^2/3/4 = 3e6, power 6e6 at stage 0;
    // each channeliser divides the noise power by 8
    prv[0] = 32'd12000000; prv[1] = 32'd1500000; prv[2] = 32'd200000;
    rlen[0] = 16'd200; rlen[1] = 16'd40; rlen[2] = 16'd10;
    mode[0] = BLANK_THROUGH; mode[1] = BLANK_THROUGH; mode[2] = BLANK_ZERO;
    gauss[0] = '0; gauss[1] = '0; gauss[2] = '0;
    beamlet_in = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int t = 0; t < NT; t++)
      for (int k = 0; k < K0; k++) begin
        automatic int re = gauss_amp(3000), im = gauss_amp(3000);
        @(negedge clk);
        if (k == 1 && t >= PULSE_T && t < PULSE_T + 3) begin re = 30000; im = -25000; end
        if (k == 0 && t >= TONE_T0 && t < TONE_T1) begin
          automatic real ph = 2.0 * 3.14159265358979 * 42.0 * t / 64.0;
          re += $rtoi(1500.0 * $cos(ph));
          im += $rtoi(1500.0 * $sin(ph));
        end
        beamlet_in.valid = 1; beamlet_in.sof = (k == 0); beamlet_in.ts = 32'(t);
        beamlet_in.x.re = 16'(re); beamlet_in.x.im = 16'(im);
      end
    @(negedge clk); beamlet_in.valid = 0;
    repeat (20) @(posedge clk);
    finish_checks();
  end

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never seen: %s", what); end
  endtask

  task automatic finish_checks();
    for (int s = 0; s < 3; s++) need($sformatf("RRP freeze stage %0d", s), n_freeze[s]);
    need("strong detector", n_strong);
    need("weak detector", n_weak);
    need("post-reset flag", n_reset);
    need("inheritance from stage 0", n_inh0);
    need("inheritance from stage 1", n_inh1);
    need("own stage-2 flag", n_own);
    need("clean accumulation", n_clean_acc);
    need("flagged accumulation", n_flag_acc);
    need("zero blanking", n_zeroed);
    need("pulse reported by stage 0", n_pulse);
    need("tone reported by stage 2", n_tone);
    checks++;
    if (n_pl < 4 * K2) begin failures++; $display("only %0d powerlets", n_pl); end
    $display("decisions=%0d powerlets=%0d freeze=%0d/%0d/%0d strong=%0d weak=%0d reset=%0d inh0=%0d inh1=%0d own=%0d",
             n_dec, n_pl, n_freeze[0], n_freeze[1], n_freeze[2], n_strong, n_weak, n_reset,
             n_inh0, n_inh1, n_own);
    $display("clean_acc=%0d flagged_acc=%0d zeroed=%0d pulse=%0d tone=%0d",
             n_clean_acc, n_flag_acc, n_zeroed, n_pulse, n_tone);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  // RRP freezes, peeked inside each stage
  always @(posedge clk) begin
    if (!rst) begin
      n_freeze[0] += int'(u_dut.u_det0.u_rrp.pw_bus.valid && u_dut.u_det0.u_rrp.freeze);
      n_freeze[1] += int'(u_dut.u_det1.u_rrp.pw_bus.valid && u_dut.u_det1.u_rrp.freeze);
      n_freeze[2] += int'(u_dut.u_det2.u_rrp.pw_bus.valid && u_dut.u_det2.u_rrp.freeze);
    end
  end

  // RFIlets
  always @(negedge clk) begin
    if (!rst) for (int s = 0; s < 3; s++) if (rfilet_valid[s]) begin
      flagged[s][{32'(rfilet_ts[s]), 32'(rfilet_ch[s])}] = 1;
      n_strong += rfilet_src[s][0];
      n_weak   += rfilet_src[s][1];
      n_reset  += rfilet_src[s][2];
      if (s == 0 && rfilet_ch[s] == 1 && rfilet_ts[s] >= PULSE_T && rfilet_ts[s] < PULSE_T + 3
          && rfilet_src[s][0]) n_pulse++;
      if (s == 2 && int'(rfilet_ch[s]) == TONE_CH && rfilet_ts[s] >= TONE_T0 && rfilet_ts[s] < TONE_T1)
        n_tone++;
    end
  end

  // decisions and the testbench's own oriented accumulation
  int       dec_ch = 0, dec_frame = 0;
  longint   acc0 [K2], acc1 [K2];
  int       cnt1 [K2];
  typedef struct { int ch; longint m0; longint m1; int n1; } pl_t;
  pl_t      pl_q [$];

  always @(negedge clk) begin
    if (!rst && decision_valid) begin
      automatic wave_bus_t d = u_dut.dec_out;
      automatic int c, ts;
      automatic bit own, i0, i1, e;
      automatic longint p;
      if (d.sof) begin
        if (n_dec != 0) dec_frame++;
        dec_ch = 0;
      end
      c  = dec_ch;
      ts = int'(d.ts);
      own = flagged[2].exists({32'(ts), 32'(c)});
      i0 = 0; i1 = 0;
      for (int t = ts; t < ts + 64; t++) i0 |= flagged[0].exists({32'(t), 32'(c % K0)});
      for (int t = ts; t < ts + 64; t += 8) i1 |= flagged[1].exists({32'(t), 32'(c % K1)});
      e = own || i0 || i1;
      checks++;
      if (decision_flag !== e || decision_src !== {i0, i1, own}) begin
        failures++;
        if (failures < 6) $display("decision ts %0d ch %0d: got %b/%b exp %b/%b", ts, c, decision_flag,
                                   decision_src, e, {i0, i1, own});
      end
      n_inh0 += i0; n_inh1 += i1; n_own += own;
      if (own) begin
        checks++;
        if (d.x !== '0) failures++;
        n_zeroed++;
      end else if (d.x != '0) n_nonzero++;
      // accumulation
      p = longint'(d.x.re) * d.x.re + longint'(d.x.im) * d.x.im;
      if (dec_frame % M == 0) begin acc0[c] = 0; acc1[c] = 0; cnt1[c] = 0; end
      if (decision_flag) begin acc1[c] += p; cnt1[c]++; n_flag_acc++; end
      else               begin acc0[c] += p; n_clean_acc++; end
      if (dec_frame % M == M - 1)
        pl_q.push_back('{ch: c, n1: cnt1[c], m0: (cnt1[c] == M) ? 0 : acc0[c] / (M - cnt1[c]),
                         m1: (cnt1[c] == 0) ? 0 : acc1[c] / cnt1[c]});
      dec_ch++;
      n_dec++;
    end
    if (!rst && pl_valid) begin
      checks++;
      n_pl++;
      if (pl_q.size() == 0 || int'(pl_ch) != pl_q[0].ch || int'(pl_m1) != pl_q[0].n1
          || int'(pl_m0) != M - pl_q[0].n1 || longint'(pl_mean0) != pl_q[0].m0
          || longint'(pl_mean1) != pl_q[0].m1) begin
        failures++;
        if (failures < 6) $display("powerlet ch %0d mismatch", pl_ch);
      end
      if (pl_q.size() != 0) void'(pl_q.pop_front());
    end
  end
endmodule
