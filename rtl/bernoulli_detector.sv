// bernoulli_detector: windowed outlier counter for K channels.
//
// Each slot's power p(t) is compared with eta_d = lambda~_d * sigma~^2, the
// detector threshold scaled from the RRP estimate of the slot's channel.
// The resulting bit b(t) (1 = outlier) enters a per-channel window of the
// last T bits. The count of ones in the window is kept as a running sum,
//     nu(t) = nu(t-1) + b(t) - b(t-T),
// exactly as in the detector figure: a T*K-bit delay line (Z^-T.K) supplies
// b(t-T) and a K-entry store (Z^-K) holds nu(t-1) of each channel. The RFI
// flag is nu(t) >= T_d. It marks the last sample of a polluted window; the
// synchronisation module spreads it over the window.
//
// Both stores are written as memories and are not cleared: for the first T
// frames after reset the missing history reads as zero (see slot_counter),
// so the window fills up like a cleared shift register.
//
// Timing: one register stage; `flag_valid`/`flag` follow the input slot by
// one cycle. T, T_D and LAMBDA_D are static, as in the paper. LAMBDA_D has
// rfi_pkg::LAMBDA_FRAC fraction bits: 29 = 29/32, 128 = 4. The defaults are
// the paper's weak-pulse detector (lambda~_d = 29/32, T = 30, T_d = 25).
module bernoulli_detector
  import rfi_pkg::*;
#(
  parameter int unsigned K        = 248,
  parameter int unsigned T        = 30,
  parameter int unsigned T_D      = 25,
  parameter int unsigned LAMBDA_D = 29
) (
  input  logic     clk,
  input  logic     rst,
  input  rrp_bus_t in,
  output logic     flag_valid,
  output logic     flag
);
  localparam int unsigned CW = $clog2(K+1);
  localparam int unsigned RW = $clog2(T+1);
  localparam int unsigned FW = $clog2(T+2);
  localparam int unsigned NW = $clog2(T+1);   // width of nu

  logic          run;
  logic [CW-1:0] ch;
  logic [RW-1:0] row;
  logic [FW-1:0] frames;

  slot_counter #(.K(K), .DEPTH(T)) u_slots (
    .clk, .rst, .valid(in.valid), .sof(in.sof), .run, .ch, .row, .frames
  );

  logic          bit_mem [T][K];   // Z^-T.K
  logic [NW-1:0] nu_mem  [K];      // Z^-K

  logic          b_new, b_old;
  logic [NW-1:0] nu_prev, nu_new;

  always_comb begin
    b_new   = over_threshold(in.p, in.sigma, LAMBDA_W'(LAMBDA_D));
    b_old   = (frames == FW'(T)) ? bit_mem[row][ch] : 1'b0;
    nu_prev = (frames == '0) ? '0 : nu_mem[ch];
    nu_new  = nu_prev + NW'(b_new) - NW'(b_old);
  end

  always_ff @(posedge clk) begin
    if (in.valid && run) begin
      bit_mem[row][ch] <= b_new;
      nu_mem[ch]       <= nu_new;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) flag_valid <= 1'b0;
    else     flag_valid <= in.valid && run;
    flag <= (nu_new >= NW'(T_D));
  end

  // The running sum can never exceed the window length.
  assert property (@(posedge clk) disable iff (rst) (in.valid && run) |-> (nu_new <= NW'(T)));

endmodule
