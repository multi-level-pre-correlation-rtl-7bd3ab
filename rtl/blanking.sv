// blanking: replaces flagged waveform samples according to the RFI mode.
//
// Two multiplexers, as in the detection-module figure. The mode mux picks
// the replacement sample: 0 = zeros (zero mode), 1 = a synthesised Gaussian
// sample (Gaussian mode), 2 = the sample itself (go-through mode: the sample
// stays but its flag travels with it). The flag mux then outputs the
// replacement when the sample is flagged and the sample itself otherwise.
// The paper's firmware has no Gaussian generator; here its sample is an
// input, `gauss`, to be driven by such a generator. The mode is static
// configuration. The unused code 3 behaves as go-through.
//
// Timing: one register stage; the flag is passed on with the sample.
module blanking
  import rfi_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  wave_bus_t   in,
  input  logic        in_flag,
  input  blank_mode_e mode,
  input  cplx_t       gauss,
  output wave_bus_t   out,
  output logic        out_flag
);
  cplx_t repl;

  always_comb begin
    unique case (mode)
      BLANK_ZERO:  repl = '0;
      BLANK_GAUSS: repl = gauss;
      default:     repl = in.x;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) out.valid <= 1'b0;
    else     out.valid <= in.valid;
    out.sof  <= in.sof;
    out.ts   <= in.ts;
    out.x    <= in_flag ? repl : in.x;
    out_flag <= in_flag;
  end

endmodule
