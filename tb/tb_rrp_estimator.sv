// tb_rrp_estimator: drives K = 4 channels with random-gap valid slots and
// checks every output slot of two estimators against a software model of
// the clipped IIR (Eq. 14 of the method: update by 2^-n (p - sigma) when
// p < lambda~ * sigma, hold otherwise; power reset loads the reset value).
// Signals: exponential-like noise powers plus rare strong impulses (which
// must freeze the estimate), a mid-run power reset, a latency check of three
// cycles, a convergence check of the estimate toward the clipped mean, and
// a second instance with a 3-time-sample IIR resynchronisation delay.
module tb_rrp_estimator;
  import rfi_pkg::*;
  localparam int K = 4, N = 4, LAM = 128, SD = 3;
  localparam int NFRAMES = 3000;

  logic clk = 0, rst = 1;
  wave_bus_t in;
  logic power_reset;
  logic [POW_W-1:0] rv;
  rrp_bus_t out, out_s;
  int checks = 0, failures = 0, freezes = 0, cyc = 0;

  rrp_estimator #(.K(K), .BETA_SHIFT(N), .LAMBDA(LAM), .SYNC_DELAY(0)) dut (
    .clk, .rst, .in, .power_reset, .power_reset_value(rv), .out);
  rrp_estimator #(.K(K), .BETA_SHIFT(N), .LAMBDA(LAM), .SYNC_DELAY(SD)) dut_s (
    .clk, .rst, .in, .power_reset, .power_reset_value(rv), .out(out_s));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  typedef struct { wave_bus_t w; bit prst; int c; } slot_t;
  slot_t      sent [$];
  rrp_bus_t   exp_q [$];
  int         exp_cyc [$];
  rrp_bus_t   all_out [$];
  rrp_bus_t   all_out_s [$];
  longint     sigma [K];

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd_amp(int scale);
    // crude Gaussian: sum of 4 uniforms
    int s = 0;
    for (int i = 0; i < 4; i++) s += int'($urandom_range(0, 2 * scale)) - scale;
    return s / 2;
  endfunction

  initial begin
    in = '0; power_reset = 0; rv = 32'd200000;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int f = 0; f < NFRAMES; f++) begin
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        while ($urandom_range(0, 4) == 0) begin
          in.valid = 0; power_reset = 0;
          @(negedge clk);
        end
        in.valid = 1;
        in.sof   = (k == 0);
        in.ts    = f;
        in.x.re  = 16'(rnd_amp(100 * (k + 1)));
        in.x.im  = 16'(rnd_amp(100 * (k + 1)));
        if ($urandom_range(0, 99) == 0) begin   // impulsive RFI
          in.x.re = 16'sd20000; in.x.im = -16'sd20000;
        end
        power_reset = (f == 1500);
        sent.push_back('{w: in, prst: power_reset, c: cyc});
      end
    end
    @(negedge clk);
    in.valid = 0; power_reset = 0;
    repeat (10) @(posedge clk);
    // model
    foreach (sent[i]) begin
      automatic slot_t s = sent[i];
      automatic int k = i % K;
      automatic int f = i / K;
      automatic longint p = longint'(s.w.x.re) * s.w.x.re + longint'(s.w.x.im) * s.w.x.im;
      automatic longint rs = longint'(rv) <<< SIG_FRAC;
      automatic longint prev = (f == 0) ? rs : sigma[k];
      automatic rrp_bus_t e;
      automatic bit frz = ((p <<< (SIG_FRAC + 5)) >= prev * LAM);
      if (frz) freezes++;
      e.valid = 1; e.sof = s.w.sof; e.ts = s.w.ts; e.x = s.w.x; e.p = POW_W'(p); e.sigma = SIG_W'(prev);
      exp_q.push_back(e);
      exp_cyc.push_back(s.c + 3);
      if (s.prst || f == 0)  sigma[k] = rs;
      else if (!frz)         sigma[k] = prev + (((p <<< SIG_FRAC) - prev) >>> N);
      else                   sigma[k] = prev;
    end
    checks++;
    if (all_out.size() != exp_q.size()) begin
      failures++; $display("count %0d vs %0d", all_out.size(), exp_q.size());
    end
    foreach (all_out[i]) begin
      if (i >= exp_q.size()) break;
      checks++;
      if (all_out[i] !== exp_q[i]) begin
        failures++;
        if (failures < 5) $display("slot %0d: sigma %0d exp %0d p %0d", i, all_out[i].sigma, exp_q[i].sigma, exp_q[i].p);
      end
    end
    // latency: out slot i must appear 3 cycles after input slot i
    foreach (out_cyc[i]) begin
      if (i >= exp_cyc.size()) break;
      checks++;
      if (out_cyc[i] != exp_cyc[i]) begin
        failures++;
        if (failures < 5) $display("latency slot %0d: out at %0d, expected %0d", i, out_cyc[i], exp_cyc[i]);
      end
    end
    // convergence: at the end sigma of channel k approaches the clipped mean
    // power; for these Gaussian-like samples it is well inside [0.5, 2] x the
    // variance 2*(100(k+1))^2*4/3/4 of the samples.
    for (int k = 0; k < K; k++) begin
      automatic real v = 2.0 * (100.0 * (k + 1)) ** 2 / 3.0;
      automatic real s = real'(sigma[k]) / real'(1 << SIG_FRAC);
      checks++;
      if (s < 0.4 * v || s > 1.5 * v) begin
        failures++; $display("ch %0d: sigma %f var %f", k, s, v);
      end
    end
    checks++;
    if (freezes < 50) begin failures++; $display("too few freezes %0d", freezes); end
    // resynchronised instance: sigma as without delay, x/p/ts from SD frames earlier
    checks++;
    if (all_out_s.size() != exp_q.size() - SD * K) begin
      failures++; $display("sync count %0d", all_out_s.size());
    end
    foreach (all_out_s[i]) begin
      automatic int j = i + SD * K;
      if (j >= exp_q.size()) break;
      checks++;
      if (all_out_s[i].sigma !== exp_q[j].sigma || all_out_s[i].x !== exp_q[i].x
          || all_out_s[i].p !== exp_q[i].p || all_out_s[i].ts !== exp_q[i].ts
          || all_out_s[i].sof !== exp_q[j].sof) begin
        failures++;
        if (failures < 8) $display("sync slot %0d mismatch", i);
      end
    end
    $display("freezes=%0d", freezes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int out_cyc [$];
  always @(negedge clk) begin
    if (!rst && out.valid) begin all_out.push_back(out); out_cyc.push_back(cyc); end
    if (!rst && out_s.valid) all_out_s.push_back(out_s);
  end
endmodule
