// slot_counter: position of the current slot in a time-multiplexed stream.
//
// The stream carries K channels per time sample, one per valid slot, with
// `sof` marking channel 0. For the current slot this module gives,
// combinationally, the channel index `ch`, the frame index modulo DEPTH
// (`row`, used as the row address of a per-channel delay line DEPTH frames
// deep) and `frames`, the number of whole frames seen before the current one,
// saturating at DEPTH. Stages that keep per-channel state in memories use
// `frames` instead of clearing those memories: state not yet written since
// reset is treated as zero. The counters advance on valid slots only, so a
// gap in `valid` freezes the stream position, as the paper asks of every
// module. Nothing is sampled before the first `sof` after reset.
module slot_counter #(
  parameter int unsigned K     = 248,
  parameter int unsigned DEPTH = 1
) (
  input  logic                             clk,
  input  logic                             rst,
  input  logic                             valid,
  input  logic                             sof,
  output logic                             run,     // slot belongs to a started stream
  output logic [$clog2(K+1)-1:0]           ch,
  output logic [$clog2(DEPTH+1)-1:0]       row,
  output logic [$clog2(DEPTH+2)-1:0]       frames
);
  localparam int unsigned CW = $clog2(K+1);
  localparam int unsigned RW = $clog2(DEPTH+1);
  localparam int unsigned FW = $clog2(DEPTH+2);

  logic          started_q;
  logic [CW-1:0] ch_q;
  logic [RW-1:0] row_q;
  logic [FW-1:0] frames_q;

  always_comb begin
    run    = started_q || sof;
    ch     = ch_q;
    row    = row_q;
    frames = frames_q;
    if (sof) begin
      ch = '0;
      if (started_q) begin
        row    = (row_q == RW'(DEPTH - 1)) ? '0 : row_q + 1'b1;
        frames = (frames_q == FW'(DEPTH)) ? frames_q : frames_q + 1'b1;
      end else begin
        row    = '0;
        frames = '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      started_q <= 1'b0;
      ch_q      <= '0;
      row_q     <= '0;
      frames_q  <= '0;
    end else if (valid && run) begin
      started_q <= 1'b1;
      ch_q      <= (ch == CW'(K - 1)) ? '0 : ch + 1'b1;
      row_q     <= row;
      frames_q  <= frames;
    end
  end

endmodule
