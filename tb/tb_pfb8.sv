// tb_pfb8: K = 3 channels, time stamps starting at 5 so the first three
// frames must be dropped (blocks start at ts = 8m), random gaps in valid.
// Each output slot b*K + k of block m is compared with a floating-point
// 8-point DFT (scaled by 1/8) of samples 8m .. 8m+7 of channel k; the
// fixed-point result may differ by at most 2 LSB. Channel 1 carries a
// complex tone in bin 3, which must dominate its bins. Also checks output
// order, start-of-frame, time stamps and the number of output frames.
module tb_pfb8;
  import rfi_pkg::*;
  localparam int K = 3, TS0 = 5, NF = 8 * 20 + 3;
  logic clk = 0, rst = 1;
  wave_bus_t in, out;
  int checks = 0, failures = 0, nout = 0;

  pfb8 #(.K(K), .TS_SHIFT(0)) dut (.clk, .rst, .in, .out);

  always #5 clk = ~clk;

  cplx_t xs [int][K];   // by time stamp

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int f = 0; f < NF; f++) begin
      for (int k = 0; k < K; k++) begin
        automatic int t = TS0 + f;
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in.valid = 0; @(negedge clk); end
        in.valid = 1; in.sof = (k == 0); in.ts = 32'(t);
        if (k == 1) begin
          in.x.re = 16'($rtoi(12000.0 * $cos(2.0 * 3.14159265358979 * 3.0 * t / 8.0)));
          in.x.im = 16'($rtoi(12000.0 * $sin(2.0 * 3.14159265358979 * 3.0 * t / 8.0)));
        end else begin
          in.x.re = 16'($urandom_range(0, 40000) - 20000);
          in.x.im = 16'($urandom_range(0, 40000) - 20000);
        end
        xs[t][k] = in.x;
      end
    end
    @(negedge clk); in.valid = 0;
    repeat (3) @(posedge clk);
    // first aligned block starts at ts 8; blocks 8..15 .. ; the last full
    // block is emitted only while the following block is written
    checks++;
    if (nout != ((TS0 + NF) / 8 - 2) * 8 * K) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst && out.valid) begin
      automatic int fr = nout / (8 * K), slot = nout % (8 * K);
      automatic int b = slot / K, k = slot % K;
      automatic int t0 = 8 + 8 * fr;
      automatic real er = 0.0, ei = 0.0;
      for (int r = 0; r < 8; r++) begin
        automatic real a = -2.0 * 3.14159265358979 * r * b / 8.0;
        er += xs[t0 + r][k].re * $cos(a) - xs[t0 + r][k].im * $sin(a);
        ei += xs[t0 + r][k].re * $sin(a) + xs[t0 + r][k].im * $cos(a);
      end
      er /= 8.0; ei /= 8.0;
      checks++;
      if (fabs(real'(out.x.re) - er) > 2.0 || fabs(real'(out.x.im) - ei) > 2.0
          || out.ts !== 32'(t0) || out.sof !== (slot == 0)) begin
        failures++;
        if (failures < 6) $display("fr %0d b %0d k %0d: got %0d,%0d exp %f,%f ts %0d", fr, b, k,
                                   out.x.re, out.x.im, er, ei, out.ts);
      end
      if (k == 1) begin
        checks++;
        if ((b == 3) != (fabs(real'(out.x.re)) > 11000.0)) failures++;
      end
      nout++;
    end
  end
endmodule
