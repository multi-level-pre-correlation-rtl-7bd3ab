// tb_power_calc: random complex samples through power_calc; checks
// p = re^2 + im^2 and the delayed sample two cycles after each input,
// including the extreme value -32768.
module tb_power_calc;
  import rfi_pkg::*;
  logic clk = 0, rst = 1;
  wave_bus_t in, out;
  logic [POW_W-1:0] p;
  int checks = 0, failures = 0;

  power_calc dut (.clk, .rst, .in, .out, .p);

  always #5 clk = ~clk;

  wave_bus_t hist [$];

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in.valid = ($urandom_range(0, 3) != 0);
      in.sof   = $urandom_range(0, 1);
      in.ts    = $urandom;
      in.x.re  = (n == 5) ? -16'sd32768 : 16'($urandom);
      in.x.im  = (n == 5) ? -16'sd32768 : 16'($urandom);
    end
    @(negedge clk);
    in.valid = 0;
    repeat (4) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: sample seen two rising edges ago
  always @(posedge clk) begin
    if (!rst) begin
      hist.push_back(in);
      if (hist.size() > 3) void'(hist.pop_front());
    end
  end

  always @(negedge clk) begin
    if (!rst && hist.size() == 3) begin
      wave_bus_t e;
      longint    ep;
      e  = hist[1];
      ep = longint'(e.x.re) * longint'(e.x.re) + longint'(e.x.im) * longint'(e.x.im);
      checks++;
      if (out.valid !== e.valid || (e.valid && (out.x !== e.x || out.ts !== e.ts || out.sof !== e.sof
          || longint'(p) != ep))) begin
        failures++;
        if (failures < 5) $display("mismatch: got p=%0d exp %0d", p, ep);
      end
    end
  end
endmodule
