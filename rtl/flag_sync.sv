// flag_sync: synchronisation module of a detection stage.
//
// Each Bernoulli detector raises its flag on the last sample of a polluted
// window of T_i samples. This module (1) delays the waveform by D = T_max - 1
// time samples, the longest detector window less one, (2) delays the flag of
// detector i by T_max - T_i time samples, so that every delayed flag arrives
// exactly when the first sample of its window leaves the waveform delay,
// (3) stretches it over the T_i samples of the window with a per-channel
// down-counter, and (4) ORs the stretched flags of all detectors and a reset
// pulse into one RFI flag. The reset pulse flags every output sample of the
// `reset_len` output frames that start after `rst` or after a pulse on
// `rfi_reset`;
// it covers the time the RRP estimator needs to converge after a power
// reset. The paper draws the reset pulse and the OR but gives neither the
// delay arithmetic nor the pulse length; both are this design's choice.
//
// All delays are per-channel memories addressed by (frame mod depth,
// channel), advanced by valid slots only. Output samples appear only once
// the waveform delay holds D whole frames, and keep their own time stamps.
//
// Timing: one register stage after the D-frame delay; `det_flag` must be
// aligned with `in` (same cycle).
module flag_sync
  import rfi_pkg::*;
#(
  parameter int unsigned K                = 248,
  parameter int unsigned N_DET            = 2,
  parameter int unsigned T_WIN [N_DET]    = '{3, 30}
) (
  input  logic             clk,
  input  logic             rst,
  input  wave_bus_t        in,
  input  logic [N_DET-1:0] det_flag,
  input  logic             rfi_reset,   // pulse: restart the reset flag
  input  logic [15:0]      reset_len,   // length of the reset flag, time samples
  output wave_bus_t        out,
  output logic             rfi_flag,    // merged flag of `out`
  output logic [N_DET-1:0] det_flags    // stretched per-detector flags of `out`
);
  function automatic int unsigned max_t();
    int unsigned m = 1;
    for (int i = 0; i < N_DET; i++) if (T_WIN[i] > m) m = T_WIN[i];
    return m;
  endfunction

  localparam int unsigned T_MAX = max_t();
  localparam int unsigned D     = (T_MAX > 1) ? T_MAX - 1 : 1;
  localparam int unsigned CW    = $clog2(K+1);
  localparam int unsigned RW    = $clog2(D+1);
  localparam int unsigned FW    = $clog2(D+2);
  localparam int unsigned NW    = $clog2(T_MAX+1);

  // --- waveform delay, D frames ------------------------------------------------
  logic          run;
  logic [CW-1:0] ch;
  logic [RW-1:0] row;
  logic [FW-1:0] frames;

  slot_counter #(.K(K), .DEPTH(D)) u_slots (
    .clk, .rst, .valid(in.valid), .sof(in.sof), .run, .ch, .row, .frames
  );

  cplx_t           x_mem  [D][K];
  logic [TS_W-1:0] ts_mem [D];
  logic [TS_W-1:0] ts_hold_q;
  logic            take, out_go;
  logic            out_begun_q, out_prev_q, out_prev;

  assign take   = in.valid && run;
  assign out_go = take && (frames == FW'(D));
  // a previous output frame exists (the stretch counters hold valid state)
  assign out_prev = in.sof ? out_begun_q : out_prev_q;

  always_ff @(posedge clk) begin
    if (take) begin
      x_mem[row][ch] <= in.x;
      if (in.sof) begin
        ts_mem[row] <= in.ts;
        ts_hold_q   <= ts_mem[row];   // time stamp of the frame now leaving
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_begun_q <= 1'b0;
      out_prev_q  <= 1'b0;
    end else if (out_go && in.sof) begin
      out_begun_q <= 1'b1;
      out_prev_q  <= out_begun_q;
    end
  end

  // --- per-detector flag delay and stretch --------------------------------------
  logic [N_DET-1:0] stretched;

  for (genvar i = 0; i < N_DET; i++) begin : g_det
    localparam int unsigned DELTA = T_MAX - T_WIN[i];
    logic          fd;   // detector flag delayed by DELTA frames
    logic [NW-1:0] cnt_mem [K];
    logic [NW-1:0] cnt_prev;

    if (DELTA == 0) begin : g_nodelay
      assign fd = det_flag[i];
    end else begin : g_delay
      localparam int unsigned DRW = $clog2(DELTA+1);
      localparam int unsigned DFW = $clog2(DELTA+2);
      logic           drun;
      logic [CW-1:0]  dch;
      logic [DRW-1:0] drow;
      logic [DFW-1:0] dframes;
      logic           fmem [DELTA][K];

      slot_counter #(.K(K), .DEPTH(DELTA)) u_dslots (
        .clk, .rst, .valid(in.valid), .sof(in.sof),
        .run(drun), .ch(dch), .row(drow), .frames(dframes)
      );
      assign fd = (dframes == DFW'(DELTA)) ? fmem[drow][dch] : 1'b0;
      always_ff @(posedge clk) begin
        if (in.valid && drun) fmem[drow][dch] <= det_flag[i];
      end
    end

    assign cnt_prev     = out_prev ? cnt_mem[ch] : '0;
    assign stretched[i] = fd || (cnt_prev != '0);

    always_ff @(posedge clk) begin
      if (out_go) begin
        if (fd)                  cnt_mem[ch] <= NW'(T_WIN[i] - 1);
        else if (cnt_prev != '0) cnt_mem[ch] <= cnt_prev - 1'b1;
        else                     cnt_mem[ch] <= '0;
      end
    end
  end

  // --- reset pulse ---------------------------------------------------------------
  // rcnt_q counts the output frames still to be flagged; the decision is
  // taken at the start of each output frame and held for the whole frame.
  logic [15:0] rcnt_q;
  logic        rframe_q, rflag;
  assign rflag = in.sof ? (rcnt_q != '0) : rframe_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      rcnt_q   <= reset_len;
      rframe_q <= 1'b0;
    end else begin
      if (out_go && in.sof) rframe_q <= rflag;
      if (rfi_reset)                                  rcnt_q <= reset_len;
      else if (out_go && in.sof && rcnt_q != '0)      rcnt_q <= rcnt_q - 1'b1;
    end
  end

  // --- output: OR of all flags -----------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) out.valid <= 1'b0;
    else     out.valid <= out_go;
    out.sof   <= in.sof;
    out.ts    <= in.sof ? ts_mem[row] : ts_hold_q;
    out.x     <= x_mem[row][ch];
    det_flags <= stretched;
    rfi_flag  <= (|stretched) || rflag;
  end

endmodule
