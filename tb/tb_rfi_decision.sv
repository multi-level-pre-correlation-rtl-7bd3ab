// tb_rfi_decision: K0 = 2, K1 = 16, K2 = 128 channels, ring of 8 blocks.
// For every block of 64 first-stage time samples the testbench drives the
// first-stage stream (64 frames), the second-stage stream (8 frames, time
// stamps 8 apart) and, two blocks later, the final-stage frame of that
// block, each with random sparse flags. The final flag of channel c must be
// its own flag OR any first-stage flag of beamlet c mod K0 in the block OR
// any second-stage flag of channel c mod K1 in the block. Each kind of
// inheritance must occur. One cycle of latency.
module tb_rfi_decision;
  import rfi_pkg::*;
  localparam int K0 = 2, K1 = 16, K2 = 128, NB = 24, LAG = 2;
  logic clk = 0, rst = 1;
  logic s0_valid, s0_sof, s0_flag, s1_valid, s1_sof, s1_flag, s2_flag, out_flag;
  logic [TS_W-1:0] s0_ts, s1_ts;
  wave_bus_t s2, out;
  logic [2:0] out_src;
  int checks = 0, failures = 0, n_own = 0, n_inh0 = 0, n_inh1 = 0, n_clean = 0;

  rfi_decision #(.K0(K0), .K1(K1), .K2(K2), .BLK_LOG2(6), .HIST(8)) dut (
    .clk, .rst, .s0_valid, .s0_sof, .s0_ts, .s0_flag, .s1_valid, .s1_sof, .s1_ts, .s1_flag,
    .s2, .s2_flag, .out, .out_flag, .out_src);

  always #5 clk = ~clk;

  bit f0 [NB][K0];   // OR over the block
  bit f1 [NB][K1];
  bit exp_q [$];
  bit [2:0] exps_q [$];
  cplx_t expx_q [$];

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    s0_valid = 0; s1_valid = 0; s2.valid = 0;
  endtask

  initial begin
    idle(); s0_sof = 0; s1_sof = 0; s2.sof = 0; s0_flag = 0; s1_flag = 0; s2_flag = 0;
    s0_ts = 0; s1_ts = 0; s2.ts = 0; s2.x = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int b = 0; b < NB; b++) begin
      for (int t = 0; t < 64; t++)
        for (int k = 0; k < K0; k++) begin
          @(negedge clk); idle();
          s0_valid = 1; s0_sof = (k == 0); s0_ts = 32'(64 * b + t);
          s0_flag = ($urandom_range(0, 299) == 0);
          f0[b][k] |= s0_flag;
        end
      for (int j = 0; j < 8; j++)
        for (int c = 0; c < K1; c++) begin
          @(negedge clk); idle();
          s1_valid = 1; s1_sof = (c == 0); s1_ts = 32'(64 * b + 8 * j);
          s1_flag = ($urandom_range(0, 59) == 0);
          f1[b][c] |= s1_flag;
        end
      if (b >= LAG) begin
        automatic int bb = b - LAG;
        for (int c = 0; c < K2; c++) begin
          @(negedge clk); idle();
          while ($urandom_range(0, 3) == 0) @(negedge clk);
          s2.valid = 1; s2.sof = (c == 0); s2.ts = 32'(64 * bb); s2.x = cplx_t'($urandom);
          s2_flag = ($urandom_range(0, 49) == 0);
          exp_q.push_back(s2_flag || f0[bb][c % K0] || f1[bb][c % K1]);
          exps_q.push_back({f0[bb][c % K0], f1[bb][c % K1], s2_flag});
          expx_q.push_back(s2.x);
        end
      end
    end
    @(negedge clk); idle();
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    checks++;
    if (n_own == 0 || n_inh0 == 0 || n_inh1 == 0 || n_clean == 0) begin
      failures++; $display("own %0d inh0 %0d inh1 %0d clean %0d", n_own, n_inh0, n_inh1, n_clean);
    end
    $display("own %0d inh0 %0d inh1 %0d clean %0d", n_own, n_inh0, n_inh1, n_clean);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst && out.valid) begin
      checks++;
      if (exp_q.size() == 0 || out_flag !== exp_q[0] || out_src !== exps_q[0] || out.x !== expx_q[0]) begin
        failures++;
        if (failures < 5) $display("mismatch: flag %b src %b", out_flag, out_src);
      end
      if (exp_q.size() != 0) begin
        n_own  += exps_q[0][0];
        n_inh1 += exps_q[0][1];
        n_inh0 += exps_q[0][2];
        n_clean += !exp_q[0];
        void'(exp_q.pop_front()); void'(exps_q.pop_front()); void'(expx_q.pop_front());
      end
    end
  end
endmodule
