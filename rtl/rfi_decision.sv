// rfi_decision: inheritance of RFI flags from coarse to fine channels.
//
// The final (third) stage channels are sub-channels of the second stage's
// channels, which are sub-channels of the first stage's beamlets. A sample
// of a coarse channel is flagged when any detector of its stage fired; by
// the inheritance rule every fine sample that was computed from it is then
// flagged too. With two 8-bin maximally decimated channelisers, final
// sample (time stamp ts, channel c) is made from first-stage samples
// ts .. ts+63 of beamlet c mod K0 and from second-stage samples
// ts, ts+8, .. ts+56 of channel c mod K1 (see pfb8 for the channel order).
//
// For each of the two coarse stages the module ORs, per channel, the flags
// of all samples that share the same block of 64 first-stage time samples
// (block = ts / 64), and keeps the last HIST blocks in a ring indexed by
// block mod HIST. A block's entry is overwritten at its first sample, so the
// ring needs no clearing; blocks whose first sample was never seen (the
// start-up block) are never asked for, because the channelisers only start
// on block boundaries. The final stage looks up its own block in both rings
// by time stamp and ORs the results with its own flag. Stages reach the
// decision at different times (detector and channeliser latencies); HIST
// must cover that lag, which an assertion checks.
//
// Timing: one register stage on the final-stage stream; `out_flag` is
// aligned with `out`. Channel counts must satisfy K1 = 8*K0, K2 = 8*K1.
module rfi_decision
  import rfi_pkg::*;
#(
  parameter int unsigned K0       = 248,
  parameter int unsigned K1       = 1984,
  parameter int unsigned K2       = 15872,
  parameter int unsigned BLK_LOG2 = 6,      // 64 first-stage samples per final sample
  parameter int unsigned HIST     = 64
) (
  input  logic            clk,
  input  logic            rst,
  // first stage: stream position and merged flag
  input  logic            s0_valid,
  input  logic            s0_sof,
  input  logic [TS_W-1:0] s0_ts,
  input  logic            s0_flag,
  // second stage
  input  logic            s1_valid,
  input  logic            s1_sof,
  input  logic [TS_W-1:0] s1_ts,
  input  logic            s1_flag,
  // final stage waveform and its own flag
  input  wave_bus_t       s2,
  input  logic            s2_flag,
  output wave_bus_t       out,
  output logic            out_flag,
  output logic [2:0]      out_src     // {inherited from stage 0, from stage 1, own}
);
  localparam int unsigned HW  = $clog2(HIST);
  localparam int unsigned C0W = $clog2(K0+1);
  localparam int unsigned C1W = $clog2(K1+1);
  localparam int unsigned C2W = $clog2(K2+1);

  // --- channel counters ---------------------------------------------------------
  logic           run0, run1, run2;
  logic [C0W-1:0] ch0;
  logic [C1W-1:0] ch1;
  logic [C2W-1:0] ch2_unused;
  logic [0:0]     row0_u, row1_u, row2_u;
  logic [1:0]     fr0_u, fr1_u, fr2_u;

  slot_counter #(.K(K0), .DEPTH(1)) u_c0 (.clk, .rst, .valid(s0_valid), .sof(s0_sof),
    .run(run0), .ch(ch0), .row(row0_u), .frames(fr0_u));
  slot_counter #(.K(K1), .DEPTH(1)) u_c1 (.clk, .rst, .valid(s1_valid), .sof(s1_sof),
    .run(run1), .ch(ch1), .row(row1_u), .frames(fr1_u));
  slot_counter #(.K(K2), .DEPTH(1)) u_c2 (.clk, .rst, .valid(s2.valid), .sof(s2.sof),
    .run(run2), .ch(ch2_unused), .row(row2_u), .frames(fr2_u));

  // parents of the current final-stage channel: c mod K1 and c mod K0
  logic [C1W-1:0] par1_q, par1;
  logic [C0W-1:0] par0_q, par0;
  always_comb begin
    par1 = s2.sof ? '0 : par1_q;
    par0 = s2.sof ? '0 : par0_q;
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      par1_q <= '0;
      par0_q <= '0;
    end else if (s2.valid && run2) begin
      par1_q <= (par1 == C1W'(K1 - 1)) ? '0 : par1 + 1'b1;
      par0_q <= (par0 == C0W'(K0 - 1)) ? '0 : par0 + 1'b1;
    end
  end

  // --- flag histories -------------------------------------------------------------
  logic hist0 [HIST][K0];
  logic hist1 [HIST][K1];

  logic [HW-1:0] blk0, blk1, blk2;
  logic          first0, first1;
  assign blk0   = HW'(s0_ts >> BLK_LOG2);
  assign blk1   = HW'(s1_ts >> BLK_LOG2);
  assign blk2   = HW'(s2.ts >> BLK_LOG2);
  assign first0 = (s0_ts[BLK_LOG2-1:0] == '0);
  assign first1 = (s1_ts[BLK_LOG2-1:0] == '0);

  always_ff @(posedge clk) begin
    if (s0_valid && run0) hist0[blk0][ch0] <= s0_flag || (!first0 && hist0[blk0][ch0]);
    if (s1_valid && run1) hist1[blk1][ch1] <= s1_flag || (!first1 && hist1[blk1][ch1]);
  end

  logic inh0, inh1;
  assign inh0 = hist0[blk2][par0];
  assign inh1 = hist1[blk2][par1];

  always_ff @(posedge clk) begin
    if (rst) out.valid <= 1'b0;
    else     out.valid <= s2.valid && run2;
    out.sof  <= s2.sof;
    out.ts   <= s2.ts;
    out.x    <= s2.x;
    out_flag <= s2_flag || inh0 || inh1;
    out_src  <= {inh0, inh1, s2_flag};
  end

  // The first stage must have finished the block the final stage reads, and
  // not yet have overwritten it (ring depth HIST).
  logic [TS_W-1:0] s0_last_ts_q;
  logic            s0_seen_q;
  always_ff @(posedge clk) begin
    if (rst) s0_seen_q <= 1'b0;
    else if (s0_valid && run0) begin
      s0_seen_q    <= 1'b1;
      s0_last_ts_q <= s0_ts;
    end
  end
  assert property (@(posedge clk) disable iff (rst)
    (s2.valid && run2) |-> (s0_seen_q
                            && (s0_last_ts_q >> BLK_LOG2) > (s2.ts >> BLK_LOG2)
                            && (s0_last_ts_q >> BLK_LOG2) - (s2.ts >> BLK_LOG2) < TS_W'(HIST)));

endmodule
