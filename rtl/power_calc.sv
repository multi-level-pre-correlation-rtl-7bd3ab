// power_calc: instantaneous power p(t) = |x(t)|^2 = I^2 + Q^2.
//
// Two register stages: the squares are registered first, their sum second,
// so `p` for a sample appears two cycles after the sample is presented.
// The waveform bus is delayed by the same two cycles (the Z^-2 drawn beside
// the |.|^2 box of the RRP estimator figure), so that `out` carries the
// sample together with its power. The pipeline advances every cycle; the
// `valid` bit travels with the data, so empty slots stay empty.
// With 16-bit signed inputs the largest power, 2 * 32768^2 = 2^31, fits the
// 32-bit unsigned output.
module power_calc
  import rfi_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  wave_bus_t        in,
  output wave_bus_t        out,
  output logic [POW_W-1:0] p
);
  logic [POW_W-2:0] sq_re_q, sq_im_q;
  wave_bus_t        d1_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      d1_q.valid <= 1'b0;
      out.valid  <= 1'b0;
    end else begin
      d1_q.valid <= in.valid;
      out.valid  <= d1_q.valid;
    end
    d1_q.sof <= in.sof;
    d1_q.ts  <= in.ts;
    d1_q.x   <= in.x;
    out.sof  <= d1_q.sof;
    out.ts   <= d1_q.ts;
    out.x    <= d1_q.x;
    sq_re_q  <= (POW_W-1)'(unsigned'(32'(in.x.re * in.x.re)));
    sq_im_q  <= (POW_W-1)'(unsigned'(32'(in.x.im * in.x.im)));
    p        <= POW_W'(sq_re_q) + POW_W'(sq_im_q);
  end

endmodule
