// tb_blanking: random samples, flags and modes. Unflagged samples pass
// unchanged; flagged ones become 0 (zero mode), the Gaussian input
// (Gaussian mode) or stay (go-through). One cycle of latency.
module tb_blanking;
  import rfi_pkg::*;
  logic clk = 0, rst = 1;
  wave_bus_t in, out;
  logic in_flag, out_flag;
  blank_mode_e mode;
  cplx_t gauss;
  int checks = 0, failures = 0;
  int seen [3];

  blanking dut (.clk, .rst, .in, .in_flag, .mode, .gauss, .out, .out_flag);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  wave_bus_t   p_in;
  logic        p_flag;
  blank_mode_e p_mode;
  cplx_t       p_g;
  bit          have = 0;

  initial begin
    in = '0; in_flag = 0; mode = BLANK_ZERO; gauss = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (have) begin
        automatic cplx_t e = p_in.x;
        if (p_flag) begin
          case (p_mode)
            BLANK_ZERO:  e = '0;
            BLANK_GAUSS: e = p_g;
            default:     e = p_in.x;
          endcase
          if (p_in.valid) seen[int'(p_mode)]++;
        end
        checks++;
        if (out.valid !== p_in.valid || out_flag !== p_flag || out.ts !== p_in.ts
            || out.sof !== p_in.sof || out.x !== e) begin
          failures++;
          if (failures < 5) $display("mismatch mode %0d flag %0d", p_mode, p_flag);
        end
      end
      in.valid = $urandom_range(0, 1);
      in.sof   = $urandom_range(0, 1);
      in.ts    = $urandom;
      in.x     = cplx_t'($urandom);
      in_flag  = $urandom_range(0, 1);
      mode     = blank_mode_e'($urandom_range(0, 2));
      gauss    = cplx_t'($urandom);
      p_in = in; p_flag = in_flag; p_mode = mode; p_g = gauss; have = 1;
    end
    for (int m = 0; m < 3; m++) begin
      checks++;
      if (seen[m] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
