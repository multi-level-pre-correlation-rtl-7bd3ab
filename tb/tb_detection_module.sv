// tb_detection_module: one detection stage with K = 4 channels, the paper's
// two detectors (strong: lambda~_d = 4, T = T_d = 3; weak: 29/32, 30, 25),
// lambda~ = 4, beta = 2^-8, zero blanking mode.
// Input: Gaussian-like noise on all channels, a 3-sample strong pulse on
// channel 2 (frames 600-602) and a 40-frame weak interferer on channel 1
// (frames 700-739, INR about +5 dB). Checks: every output sample is the
// input sample or, when flagged, zero; output cycle = input cycle of the
// same slot 29 frames later + 6; the pulse is flagged by the strong
// detector over all three samples; the weak interferer is flagged; the
// reset flag covers the first 400 frames; few flags on the quiet channel;
// one RFIlet per flagged sample.
module tb_detection_module;
  import rfi_pkg::*;
  localparam int K = 4, NF = 1000, RL = 400, D = 29;
  logic clk = 0, rst = 1;
  wave_bus_t in, out;
  logic out_flag, rv;
  logic [TS_W-1:0] rts;
  logic [CH_W-1:0] rch;
  logic [2:0] rsrc;
  int checks = 0, failures = 0, cyc = 0, nout = 0, nflag = 0, nrfilet = 0;
  int quiet_flags = 0, quiet_n = 0, pulse_flags = 0, pulse_strong = 0, weak_flags = 0;

  detection_module #(.K(K), .BETA_SHIFT(8)) dut (
    .clk, .rst, .in, .power_reset(1'b0), .power_reset_value(32'd1000000),
    .reset_len(16'(RL)), .mode(BLANK_ZERO), .gauss('0),
    .out, .out_flag, .rfilet_valid(rv), .rfilet_ts(rts), .rfilet_ch(rch), .rfilet_src(rsrc));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  cplx_t xs [NF][K];
  int    in_cyc [NF][K];

  initial begin
    #10000000;
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
    in = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int f = 0; f < NF; f++)
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        in.valid = 1; in.sof = (k == 0); in.ts = 32'(f);
        in.x.re = 16'(gauss_amp(600));
        in.x.im = 16'(gauss_amp(600));
        if (k == 2 && f >= 600 && f <= 602) begin in.x.re = 16'sd12000; in.x.im = 16'sd9000; end
        if (k == 1 && f >= 700 && f < 740) begin
          in.x.re = 16'(int'(in.x.re) + 900);   // constant carrier, INR ~ +5 dB
        end
        xs[f][k] = in.x;
        in_cyc[f][k] = cyc;
      end
    @(negedge clk); in.valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (nout != (NF - D) * K) begin failures++; $display("outputs %0d", nout); end
    checks++;
    if (pulse_flags != 3 || pulse_strong != 3) begin failures++; $display("pulse flags %0d strong %0d", pulse_flags, pulse_strong); end
    checks++;
    if (weak_flags < 10) begin failures++; $display("weak flags %0d", weak_flags); end
    checks++;
    if (quiet_flags * 20 > quiet_n) begin failures++; $display("quiet flags %0d of %0d", quiet_flags, quiet_n); end
    checks++;
    if (nrfilet != nflag) begin failures++; $display("rfilets %0d flags %0d", nrfilet, nflag); end
    $display("flags=%0d pulse=%0d weak=%0d quiet=%0d/%0d", nflag, pulse_flags, weak_flags, quiet_flags, quiet_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst && rv) begin
      nrfilet++;
      if (int'(rch) == 2 && rts >= 600 && rts <= 602) pulse_strong += rsrc[0];
    end
    if (!rst && out.valid) begin
      automatic int f = int'(out.ts), k = nout % K;
      automatic cplx_t e = out_flag ? cplx_t'('0) : xs[f][k];
      checks++;
      if (f != nout / K || out.x !== e || out.sof !== (k == 0) || cyc != in_cyc[f + D][k] + 6) begin
        failures++;
        if (failures < 5) $display("f %0d k %0d: x %h exp %h cyc %0d exp %0d", f, k, out.x, e, cyc, in_cyc[f + D][k] + 6);
      end
      checks++;
      if (f < RL && !out_flag) failures++;
      nflag += out_flag;
      if (k == 2 && f >= 600 && f <= 602) pulse_flags += out_flag;
      if (k == 1 && f >= 700 && f < 740) weak_flags += out_flag;
      if (k == 0 && f >= RL) begin quiet_n++; quiet_flags += out_flag; end
      nout++;
    end
  end
endmodule
