// tb_flag_sync: K = 3 channels, two detectors with windows T = 2 and T = 4,
// random sparse detector flags and random gaps in valid. The model records
// every input sample and flag per channel and frame. Output frame s must
// carry the input samples of frame s (waveform delay of T_max - 1 = 3
// frames), with detector i's stretched flag set when detector i fired at
// any frame s .. s + T_i - 1 of that channel, and the merged flag set when
// either stretched flag or the reset pulse is. The reset pulse covers the
// first 2 output frames after reset and 2 frames after a pulse on
// rfi_reset, given right before an output frame starts.
module tb_flag_sync;
  import rfi_pkg::*;
  localparam int K = 3, NF = 400, D = 3, RL = 2, PULSE_F = 200;
  localparam int unsigned TW [2] = '{2, 4};
  logic clk = 0, rst = 1;
  wave_bus_t in, out;
  logic [1:0] det_flag, det_flags;
  logic rfi_reset, rfi_flag;
  int checks = 0, failures = 0, nout = 0, stretched_only = 0, reset_flags = 0;

  flag_sync #(.K(K), .N_DET(2), .T_WIN(TW)) dut (
    .clk, .rst, .in, .det_flag, .rfi_reset, .reset_len(16'(RL)), .out, .rfi_flag, .det_flags);

  always #5 clk = ~clk;

  cplx_t xs [NF][K];
  bit    fl [NF][K][2];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = '0; det_flag = '0; rfi_reset = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int f = 0; f < NF; f++) begin
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        rfi_reset = 0;
        while ($urandom_range(0, 3) == 0) begin in.valid = 0; @(negedge clk); end
        if (f == PULSE_F + D && k == 0) begin   // pulse just before output frame PULSE_F starts
          in.valid = 0; rfi_reset = 1; @(negedge clk); rfi_reset = 0;
        end
        in.valid = 1; in.sof = (k == 0); in.ts = 32'(f + 1000);
        in.x = cplx_t'($urandom);
        det_flag[0] = ($urandom_range(0, 19) == 0);
        det_flag[1] = ($urandom_range(0, 29) == 0);
        xs[f][k] = in.x;
        fl[f][k][0] = det_flag[0];
        fl[f][k][1] = det_flag[1];
      end
    end
    @(negedge clk); in.valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (nout != (NF - D) * K) begin failures++; $display("outputs %0d", nout); end
    checks++;
    if (stretched_only < 10 || reset_flags != 2 * RL * K) begin
      failures++; $display("stretch-only %0d reset %0d", stretched_only, reset_flags);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst && out.valid) begin
      automatic int s = nout / K, k = nout % K;
      automatic bit [1:0] e;
      automatic bit rs = (s < RL) || (s >= PULSE_F && s < PULSE_F + RL);
      for (int i = 0; i < 2; i++) begin
        e[i] = 0;
        for (int t = s; t < s + int'(TW[i]) && t < NF; t++) e[i] |= fl[t][k][i];
      end
      checks++;
      if (out.x !== xs[s][k] || out.ts !== 32'(s + 1000) || out.sof !== (k == 0)
          || det_flags !== e || rfi_flag !== ((|e) || rs)) begin
        failures++;
        if (failures < 6) $display("s=%0d k=%0d flags %b exp %b rfi %b", s, k, det_flags, e, rfi_flag);
      end
      if ((|e) && !fl[s][k][0] && !fl[s][k][1]) stretched_only++;
      if (rs) reset_flags++;
      nout++;
    end
  end
endmodule
