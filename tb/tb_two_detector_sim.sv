// tb_two_detector_sim: the single-channel detector experiment, run on the
// RTL at the default detector settings (RRP lambda~ = 4, beta = 2^-11;
// strong detector [lambda~_d, T, T_d] = [4, 3, 3], weak [29/32, 30, 25]).
//
// One channel (K = 1) of complex Gaussian noise, generated here by the
// Box-Muller method, feeds one detection module. The testbench watches the
// raw outputs of the two Bernoulli detectors (one decision per sample, for
// the window ending at that sample) and checks:
//  * false alarms under noise alone: the fraction of windows flagged must lie
//    within a factor 0.15 .. 4 of the binomial tail
//      pfa = sum_{k >= T_d} C(T,k) p^k (1-p)^(T-k),  p = exp(-lambda~_d / g~)
//    with g~ = 1.113 (the clipped-mean gain for lambda~ = 4), i.e.
//    2.1e-5 for the strong and 1.3e-5 for the weak detector. The bounds are
//    wide because overlapping windows flag in clusters: one noise burst
//    that fills a 30-sample window usually fills its neighbours too;
//  * strong pulses: 3-sample carriers 15 dB above the noise, all caught by
//    the strong detector;
//  * weak pulses: 300-sample carriers at 2 dB, each caught by the weak
//    detector at least once;
//  * the estimator freezes on pulse samples (at least once per pulse).
// The synchronised output flag must cover every raw detector flag window.
module tb_two_detector_sim;
  import rfi_pkg::*;

  localparam int    SIGMA    = 1500;        // noise std per component
  localparam int    WARM     = 20000;       // samples before counting
  localparam int    NNOISE   = 6000000;     // noise-only samples counted
  localparam int    NPULSE   = 40;          // pulses of each kind
  localparam int    PERIOD   = 4000;        // samples between pulse starts
  localparam int    NS       = WARM + NNOISE + 2 * NPULSE * PERIOD;
  localparam real   PI       = 3.14159265358979;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  wave_bus_t        in, out;
  logic             out_flag;
  logic             rl_valid;
  logic [TS_W-1:0]  rl_ts;
  logic [CH_W-1:0]  rl_ch;
  logic [2:0]       rl_src;
  logic             power_reset;

  // clipped mean of |x|^2 = 2 sigma^2 / 1.113
  localparam logic [POW_W-1:0] RV = POW_W'(int'(2.0 * SIGMA * SIGMA / 1.113));

  detection_module #(.K(1)) dut (
    .clk, .rst, .in, .power_reset, .power_reset_value(RV),
    .reset_len(16'd0), .mode(BLANK_THROUGH), .gauss('0),
    .out, .out_flag,
    .rfilet_valid(rl_valid), .rfilet_ts(rl_ts), .rfilet_ch(rl_ch), .rfilet_src(rl_src)
  );

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // one standard normal sample
  function automatic real randn();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  function automatic logic [DATA_W-1:0] sat16(real v);
    if (v > 32767.0)  return 16'sd32767;
    if (v < -32768.0) return -16'sd32768;
    return DATA_W'($rtoi(v));
  endfunction

  // pulse schedule: after the noise-only part, pulses alternate is_strong/weak
  function automatic int pulse_of(int s, output bit is_strong);
    int r, q;
    is_strong = 1'b0;
    if (s < WARM + NNOISE) return -1;
    r = s - WARM - NNOISE;
    q = r / PERIOD;
    is_strong = (q % 2 == 0);
    if ((r % PERIOD) < (is_strong ? 3 : 300)) return q;
    return -1;
  endfunction

  // stimulus
  initial begin
    bit   is_strong;
    int   q;
    real  amp, ph;
    in = '0; power_reset = 1'b0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int s = 0; s < NS; s++) begin
      q = pulse_of(s, is_strong);
      in.valid <= 1'b1;
      in.sof   <= 1'b1;
      in.ts    <= TS_W'(s);
      power_reset <= (s == 0);
      if (q >= 0) begin
        // carrier power INR * 2 sigma^2; INR = 15 dB (is_strong) or 0 dB (weak)
        amp = SIGMA * $sqrt(2.0 * (is_strong ? 31.6227766 : 1.5848932));
        ph  = 0.37 * real'(s);
        in.x.re <= sat16(SIGMA * randn() + amp * $cos(ph));
        in.x.im <= sat16(SIGMA * randn() + amp * $sin(ph));
      end else begin
        in.x.re <= sat16(SIGMA * randn());
        in.x.im <= sat16(SIGMA * randn());
      end
      @(posedge clk);
    end
    in.valid <= 1'b0;
    repeat (100) @(posedge clk);
    finish_run();
  end

  // observation of the raw detector decisions, sample by sample
  int n_dec = 0;                  // decisions seen = index of the sample
  int fa_strong = 0, fa_weak = 0, n_noise = 0;
  int hit_strong [NPULSE];
  int hit_weak   [NPULSE];
  int n_freeze   = 0;
  int raw_any    = 0, out_any = 0;

  initial foreach (hit_strong[i]) begin hit_strong[i] = 0; hit_weak[i] = 0; end

  // sampled at the falling edge, between the DUT's register updates
  initial forever begin
    @(negedge clk);
    if (!rst && dut.det_valid[0]) begin
      bit is_strong;
      int q, s;
      s = n_dec;
      n_dec++;
      if (s >= WARM && s < WARM + NNOISE) begin
        n_noise++;
        fa_strong += int'(dut.det_flag[0]);
        fa_weak   += int'(dut.det_flag[1]);
      end
      // a window ending up to T-1 samples after a pulse still overlaps it
      for (int d = 0; d < 30; d++) begin
        q = pulse_of(s - d, is_strong);
        if (q >= 0) begin
          if (is_strong && d < 3 && dut.det_flag[0]) hit_strong[q / 2]++;
          if (!is_strong && dut.det_flag[1])         hit_weak[q / 2]++;
          break;
        end
      end
      raw_any += int'(|dut.det_flag);
    end
    // the estimator skips its update when p >= lambda~ * sigma~^2
    if (!rst && dut.rrp.valid && s_is_pulse(int'(dut.rrp.ts)) &&
        over_threshold(dut.rrp.p, dut.rrp.sigma, LAMBDA_W'(128)))
      n_freeze++;
    if (!rst && out.valid) out_any += int'(out_flag);
  end

  function automatic bit s_is_pulse(int s);
    bit kind;
    int q;
    q = pulse_of(s, kind);
    return q >= 0;
  endfunction

  task automatic finish_run();
    real p_s, p_w, r_s, r_w;
    int  miss_s = 0, miss_w = 0;
    p_s = real'(fa_strong) / real'(n_noise);
    p_w = real'(fa_weak)   / real'(n_noise);
    r_s = p_s / 2.0963e-5;
    r_w = p_w / 1.3e-5;
    $display("noise samples %0d: strong pfa %e (%0d), weak pfa %e (%0d)",
             n_noise, p_s, fa_strong, p_w, fa_weak);
    check(n_dec == NS, "one detector decision per sample");
    check(r_s > 0.15 && r_s < 4.0, "strong detector false-alarm rate near theory");
    check(r_w > 0.15 && r_w < 4.0, "weak detector false-alarm rate near theory");
    for (int i = 0; i < NPULSE; i++) begin
      if (hit_strong[i] == 0) miss_s++;
      if (hit_weak[i]   == 0) miss_w++;
      check(hit_strong[i] > 0, $sformatf("strong pulse %0d caught", i));
      check(hit_weak[i] > 0,   $sformatf("weak pulse %0d caught", i));
    end
    $display("pulses: strong %0d/%0d caught, weak %0d/%0d caught, freezes on pulses %0d",
             NPULSE - miss_s, NPULSE, NPULSE - miss_w, NPULSE, n_freeze);
    check(n_freeze >= 2 * NPULSE, "estimator froze on pulse samples");
    // every raw window flag is stretched over T_i >= 1 output samples
    check(out_any >= raw_any, "synchronised flag covers the raw flags");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (NS + 100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
