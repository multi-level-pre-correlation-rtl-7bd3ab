// tb_bernoulli_detector: two detectors (T=5, T_d=3, lambda~_d=1 and the
// paper's strong setting T=T_d=3, lambda~_d=4) on K = 3 channels with
// random gaps in valid. A software model keeps, per channel, the list of
// outlier bits (p >= lambda~_d * sigma) and counts the ones among the last
// T; the flag must equal count >= T_d, one cycle after the slot.
module tb_bernoulli_detector;
  import rfi_pkg::*;
  localparam int K = 3;
  localparam int NFR = 600;
  logic clk = 0, rst = 1;
  rrp_bus_t in;
  logic fv_a, f_a, fv_b, f_b;
  int checks = 0, failures = 0, flags_a = 0, flags_b = 0;

  bernoulli_detector #(.K(K), .T(5), .T_D(3), .LAMBDA_D(32))  dut_a (.clk, .rst, .in, .flag_valid(fv_a), .flag(f_a));
  bernoulli_detector #(.K(K), .T(3), .T_D(3), .LAMBDA_D(128)) dut_b (.clk, .rst, .in, .flag_valid(fv_b), .flag(f_b));

  always #5 clk = ~clk;

  bit hist_a [K][$];
  bit hist_b [K][$];
  bit exp_a [$];
  bit exp_b [$];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit expect_flag(ref bit h [$], input int t, input int td);
    int c = 0;
    for (int i = 0; i < t && i < h.size(); i++) c += h[h.size() - 1 - i];
    return c >= td;
  endfunction

  initial begin
    in = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int f = 0; f < NFR; f++) begin
      for (int k = 0; k < K; k++) begin
        automatic longint sg = 1000;
        automatic longint p;
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in.valid = 0; @(negedge clk); end
        // bursts of high power in some frames make long runs of outliers
        p = ((f / 20) % 3 == k) ? $urandom_range(800, 6000) : $urandom_range(0, 2000);
        in.valid = 1; in.sof = (k == 0); in.ts = f;
        in.p = POW_W'(p);
        in.sigma = SIG_W'(sg << SIG_FRAC);
        hist_a[k].push_back(p >= sg);
        hist_b[k].push_back(p >= 4 * sg);
        exp_a.push_back(expect_flag(hist_a[k], 5, 3));
        exp_b.push_back(expect_flag(hist_b[k], 3, 3));
      end
    end
    @(negedge clk); in.valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (exp_a.size() != 0 || exp_b.size() != 0) begin failures++; $display("missing outputs"); end
    checks++;
    if (flags_a < 20 || flags_b < 5) begin failures++; $display("few flags %0d %0d", flags_a, flags_b); end
    $display("flags a=%0d b=%0d", flags_a, flags_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst && fv_a) begin
      checks++;
      if (exp_a.size() == 0 || f_a !== exp_a[0]) begin failures++; if (failures < 5) $display("a mismatch"); end
      if (exp_a.size() != 0) void'(exp_a.pop_front());
      flags_a += f_a;
    end
    if (!rst && fv_b) begin
      checks++;
      if (exp_b.size() == 0 || f_b !== exp_b[0]) begin failures++; if (failures < 5) $display("b mismatch"); end
      if (exp_b.size() != 0) void'(exp_b.pop_front());
      flags_b += f_b;
    end
  end
endmodule
