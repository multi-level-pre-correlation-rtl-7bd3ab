// rfilet_gen: RFIlet generator of a detection stage.
//
// An RFIlet is the record a stage sends to the RFI database. The paper names
// the generator but does not define the record; this design emits one record
// for every flagged sample: its time stamp, its channel index and which
// detectors (and the reset pulse) flagged it. Clean samples produce nothing,
// so the record rate is the flag rate, the metadata cost the paper sets out
// to measure.
//
// Timing: one register stage; `rfilet_valid` is high for one cycle per
// record. The input is the synchronised stream of the stage.
module rfilet_gen
  import rfi_pkg::*;
#(
  parameter int unsigned K     = 248,
  parameter int unsigned N_DET = 2
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             valid,
  input  logic             sof,
  input  logic [TS_W-1:0]  ts,
  input  logic             rfi_flag,
  input  logic [N_DET-1:0] det_flags,
  output logic             rfilet_valid,
  output logic [TS_W-1:0]  rfilet_ts,
  output logic [CH_W-1:0]  rfilet_ch,
  output logic [N_DET:0]   rfilet_src    // {reset/other, detector N_DET-1 .. 0}
);
  localparam int unsigned CW = $clog2(K+1);

  logic          run;
  logic [CW-1:0] ch;
  logic [0:0]    row_unused;
  logic [1:0]    frames_unused;

  slot_counter #(.K(K), .DEPTH(1)) u_slots (
    .clk, .rst, .valid, .sof, .run, .ch, .row(row_unused), .frames(frames_unused)
  );

  always_ff @(posedge clk) begin
    if (rst) rfilet_valid <= 1'b0;
    else     rfilet_valid <= valid && run && rfi_flag;
    rfilet_ts  <= ts;
    rfilet_ch  <= CH_W'(ch);
    rfilet_src <= {rfi_flag && (det_flags == '0), det_flags};
  end

endmodule
