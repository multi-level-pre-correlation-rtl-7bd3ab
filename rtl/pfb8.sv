// pfb8: maximally decimated 8-bin channeliser for K time-multiplexed channels.
//
// Every input channel is split into 8 sub-channels, each at 1/8 of the input
// sample rate, so the output stream carries 8*K channels at the same slot
// rate as the input. The paper specifies only this function (an 8-bin,
// maximally decimated polyphase filter bank) and not its prototype filter.
// This design uses the simplest filter bank that does it: a one-tap-per-
// branch polyphase bank, i.e. an 8-point DFT of each block of 8 consecutive
// samples of a channel,
//     X_b = 1/8 * sum_{r=0..7} x(8m + r) * exp(-j 2 pi r b / 8),  b = 0..7.
// Twiddles are Q14 constants (1 = 16384, cos(pi/4) = 11585); results are
// truncated toward minus infinity and saturated to 16 bits.
//
// Blocks are aligned on the time stamp: input time sample ts belongs to row
// r = ts[TS_SHIFT+2:TS_SHIFT] of the bank ts[TS_SHIFT+3]. The first stage's
// PFB sees one time stamp per sample (TS_SHIFT = 0); the second sees one per
// 8 (TS_SHIFT = 3). Frames before the first row 0 are dropped. Two banks of
// 8 x K samples alternate: while one is written, the block in the other is
// transformed, one output bin per input slot.
//
// Output order within a frame: slot b*K + k is bin b of input channel k, so
// output channel c derives from input channel c mod K. The output time stamp
// is the time stamp of row 0 of the block. Output valid follows input valid
// one cycle later, from the second block on: the latency is one block
// (8 frames) plus one cycle.
module pfb8
  import rfi_pkg::*;
#(
  parameter int unsigned K        = 248,
  parameter int unsigned TS_SHIFT = 0
) (
  input  logic      clk,
  input  logic      rst,
  input  wave_bus_t in,
  output wave_bus_t out
);
  localparam int unsigned CW  = $clog2(K+1);
  localparam int signed   ONE = 16384;
  localparam int signed   C45 = 11585;

  logic          run;
  logic [CW-1:0] ch;
  logic [0:0]    row_unused;
  logic [1:0]    frames_unused;

  slot_counter #(.K(K), .DEPTH(1)) u_slots (
    .clk, .rst, .valid(in.valid), .sof(in.sof), .run, .ch, .row(row_unused), .frames(frames_unused)
  );

  logic [2:0] r;
  logic       bank;
  assign r    = in.ts[TS_SHIFT +: 3];
  assign bank = in.ts[TS_SHIFT + 3];

  cplx_t           x_mem [2][8][K];
  logic [TS_W-1:0] blk_ts [2];
  logic [1:0]      complete_q;
  logic            aligned_q, take;

  // writing starts at the first row 0 after reset
  assign take = in.valid && run && (aligned_q || (in.sof && r == 3'd0));

  always_ff @(posedge clk) begin
    if (rst) begin
      aligned_q  <= 1'b0;
      complete_q <= '0;
    end else if (take) begin
      aligned_q <= 1'b1;
      if (in.sof && r == 3'd0) complete_q[bank] <= 1'b0;
      if (r == 3'd7 && ch == CW'(K - 1)) complete_q[bank] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (take) begin
      x_mem[bank][r][ch] <= in.x;
      if (in.sof && r == 3'd0) blk_ts[bank] <= in.ts;
    end
  end

  // twiddle exp(-j 2 pi m / 8) = cos - j sin, m = 0..7
  function automatic int signed tw_cos(logic [2:0] m);
    case (m)
      3'd0: return ONE;  3'd1: return C45;  3'd2: return 0;    3'd3: return -C45;
      3'd4: return -ONE; 3'd5: return -C45; 3'd6: return 0;    default: return C45;
    endcase
  endfunction
  function automatic int signed tw_sin(logic [2:0] m);
    case (m)
      3'd0: return 0;    3'd1: return C45;  3'd2: return ONE;  3'd3: return C45;
      3'd4: return 0;    3'd5: return -C45; 3'd6: return -ONE; default: return -C45;
    endcase
  endfunction

  function automatic logic signed [DATA_W-1:0] sat(logic signed [39:0] v);
    if (v > 40'sd32767)       return DATA_W'(32767);
    else if (v < -40'sd32768) return DATA_W'(-32768);
    else                      return DATA_W'(v);
  endfunction

  cplx_t bin_x;
  always_comb begin
    logic signed [39:0] acc_re, acc_im;
    logic [2:0]         m;
    cplx_t              s;
    acc_re = '0;
    acc_im = '0;
    for (int rr = 0; rr < 8; rr++) begin
      s = x_mem[!bank][rr][ch];
      m = 3'(rr * r);
      // (a + jb)(c - js) = (ac + bs) + j(bc - as)
      acc_re += 40'(s.re * tw_cos(m)) + 40'(s.im * tw_sin(m));
      acc_im += 40'(s.im * tw_cos(m)) - 40'(s.re * tw_sin(m));
    end
    bin_x.re = sat(acc_re >>> 17);   // Q14 twiddle and the 1/8
    bin_x.im = sat(acc_im >>> 17);
  end

  always_ff @(posedge clk) begin
    if (rst) out.valid <= 1'b0;
    else     out.valid <= take && complete_q[!bank];
    out.sof <= in.sof && r == 3'd0;
    out.ts  <= blk_ts[!bank];
    out.x   <= bin_x;
  end

  // Time stamps must advance by one frame step at every start of frame.
  logic [TS_W-1:0] last_ts_q;
  always_ff @(posedge clk) if (take && in.sof) last_ts_q <= in.ts;
  assert property (@(posedge clk) disable iff (rst)
                   (take && in.sof && aligned_q) |-> (in.ts == last_ts_q + (TS_W'(1) << TS_SHIFT)));

endmodule
