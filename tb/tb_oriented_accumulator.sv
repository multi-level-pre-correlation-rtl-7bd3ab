// tb_oriented_accumulator: K = 3 channels, M = 4 spectra per integration,
// random samples and flags, random gaps in valid. At the end of each
// integration every channel must report M0 + M1 = M, the flagged count M1,
// and the integer averages of the clean and flagged powers computed by the
// testbench. Both accumulators must be used.
module tb_oriented_accumulator;
  import rfi_pkg::*;
  localparam int K = 3, M = 4, NI = 30;
  logic clk = 0, rst = 1;
  wave_bus_t in;
  logic in_flag;
  logic pl_valid;
  logic [CH_W-1:0] pl_ch;
  logic [TS_W-1:0] pl_ts;
  logic [POW_W-1:0] pl_mean0, pl_mean1;
  logic [2:0] pl_m0, pl_m1;
  int checks = 0, failures = 0, n_pl = 0, n_mixed = 0;

  oriented_accumulator #(.K(K), .M(M)) dut (.clk, .rst, .in, .in_flag,
    .pl_valid, .pl_ch, .pl_ts, .pl_mean0, .pl_mean1, .pl_m0, .pl_m1);

  always #5 clk = ~clk;

  typedef struct { int ch; int ts; longint m0; longint m1; int n1; } pl_t;
  pl_t exp_q [$];

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s0 [K], s1 [K];
    int     n1 [K];
    in = '0; in_flag = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < NI; i++) begin
      for (int f = 0; f < M; f++)
        for (int k = 0; k < K; k++) begin
          automatic longint p;
          @(negedge clk);
          while ($urandom_range(0, 3) == 0) begin in.valid = 0; @(negedge clk); end
          in.valid = 1; in.sof = (k == 0); in.ts = 32'(100 + i * M + f);
          in.x = cplx_t'($urandom);
          in_flag = ($urandom_range(0, 2) == 0);
          p = longint'(in.x.re) * in.x.re + longint'(in.x.im) * in.x.im;
          if (f == 0) begin s0[k] = 0; s1[k] = 0; n1[k] = 0; end
          if (in_flag) begin s1[k] += p; n1[k]++; end
          else         s0[k] += p;
          if (f == M - 1)
            exp_q.push_back('{ch: k, ts: 100 + i * M, n1: n1[k],
                              m0: (n1[k] == M) ? 0 : s0[k] / (M - n1[k]),
                              m1: (n1[k] == 0) ? 0 : s1[k] / n1[k]});
        end
    end
    @(negedge clk); in.valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_pl != NI * K) begin failures++; $display("powerlets %0d", n_pl); end
    checks++;
    if (n_mixed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst && pl_valid) begin
      checks++;
      n_pl++;
      if (exp_q.size() == 0 || int'(pl_ch) != exp_q[0].ch || int'(pl_ts) != exp_q[0].ts
          || int'(pl_m1) != exp_q[0].n1 || int'(pl_m0) != M - exp_q[0].n1
          || longint'(pl_mean0) != exp_q[0].m0 || longint'(pl_mean1) != exp_q[0].m1) begin
        failures++;
        if (failures < 5 && exp_q.size() != 0)
          $display("ch %0d: m1 %0d/%0d mean0 %0d/%0d mean1 %0d/%0d", pl_ch, pl_m1, exp_q[0].n1,
                   pl_mean0, exp_q[0].m0, pl_mean1, exp_q[0].m1);
      end
      if (exp_q.size() != 0) begin
        if (exp_q[0].n1 != 0 && exp_q[0].n1 != M) n_mixed++;
        void'(exp_q.pop_front());
      end
    end
  end
endmodule
