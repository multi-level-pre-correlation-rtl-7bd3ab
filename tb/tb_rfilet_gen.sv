// tb_rfilet_gen: K = 5 channels with random flags; every flagged slot must
// produce exactly one RFIlet with its time stamp, channel and sources, and
// clean slots none.
module tb_rfilet_gen;
  import rfi_pkg::*;
  localparam int K = 5;
  logic clk = 0, rst = 1;
  logic valid, sof, rfi_flag;
  logic [TS_W-1:0] ts;
  logic [1:0] det_flags;
  logic rv;
  logic [TS_W-1:0] rts;
  logic [CH_W-1:0] rch;
  logic [2:0] rsrc;
  int checks = 0, failures = 0;

  rfilet_gen #(.K(K), .N_DET(2)) dut (.clk, .rst, .valid, .sof, .ts, .rfi_flag, .det_flags,
    .rfilet_valid(rv), .rfilet_ts(rts), .rfilet_ch(rch), .rfilet_src(rsrc));

  always #5 clk = ~clk;

  typedef struct { int ts; int ch; bit [2:0] src; } rec_t;
  rec_t exp_q [$];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 0; sof = 0; rfi_flag = 0; ts = 0; det_flags = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int f = 0; f < 200; f++) begin
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin valid = 0; @(negedge clk); end
        valid = 1; sof = (k == 0); ts = 32'(f * 7);
        det_flags = 2'($urandom_range(0, 3)) & {($urandom_range(0, 3) == 0), ($urandom_range(0, 3) == 0)};
        rfi_flag = (det_flags != 0) || ($urandom_range(0, 9) == 0);
        if (rfi_flag) exp_q.push_back('{ts: f * 7, ch: k, src: {det_flags == 0, det_flags}});
      end
    end
    @(negedge clk); valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d RFIlets missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst && rv) begin
      checks++;
      if (exp_q.size() == 0 || rts !== 32'(exp_q[0].ts) || rch !== 16'(exp_q[0].ch) || rsrc !== exp_q[0].src) begin
        failures++;
        if (failures < 5) $display("bad RFIlet ts=%0d ch=%0d", rts, rch);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
  end
endmodule
