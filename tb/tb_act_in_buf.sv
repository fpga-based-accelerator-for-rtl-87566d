// tb_act_in_buf: self-checking test of the input activation buffer. A byte
// stream of four 5x4 frames with C0=3 channels is sent as 64-bit words
// (pixels straddle words) with random gaps; the next layer grants room at
// random. Checks: pixels come out in order and intact, a group of KP*W
// pixels is claimed before it is written and only when room was offered,
// and with words always available and room always granted the buffer
// sustains one pixel per cycle within a group (a claim cycle separates two
// groups, this design's choice; the next layer needs far longer per group).
// The byte layout of frames in memory is this design's choice; the role of
// the buffer (unpack DDR words into pixels) is the published one.
module tb_act_in_buf;
  import nn_pkg::*;
  localparam int W = 5, H = 4, C0 = 3, KP = 2, DDR_W = 64, BPW = DDR_W / 8, FRAMES = 4;
  localparam int NPIX = W * H * FRAMES, NWORDS = NPIX * C0 / BPW;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = !clk;

  logic in_valid = 0, in_ready, ds_space = 0, ds_claim, out_valid;
  logic [DDR_W-1:0] in_data = '0;
  act_t out_data [C0];
  logic [31:0] pixel_count;

  act_in_buf #(.W(W), .C0(C0), .KP(KP), .DDR_W(DDR_W)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] bytes [NWORDS * BPW];
  int nout = 0, granted = 0, run = 0, max_run = 0;
  logic fast = 0;

  initial foreach (bytes[i]) bytes[i] = 8'($urandom);

  always @(negedge clk) ds_space <= fast || ($urandom_range(2) == 0);

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (granted == 0) begin failures++; $display("pixel without claim"); end
      granted--;
      for (int c = 0; c < C0; c++) begin
        checks++;
        if (out_data[c] !== act_t'(bytes[nout * C0 + c])) begin
          failures++; $display("MISMATCH pixel %0d ch %0d", nout, c);
        end
      end
      nout++;
      run++;
      if (fast && run > max_run) max_run = run;
    end else run = 0;
    if (ds_claim) begin
      checks++;
      if (!ds_space || granted != 0) begin failures++; $display("bad claim at pixel %0d", nout); end
      granted = KP * W;
    end
  end

  initial begin : main
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NWORDS; i++) begin
      if (i == NWORDS / 2) fast = 1;
      if (!fast) repeat ($urandom_range(3)) @(negedge clk);
      in_valid = 1;
      for (int b = 0; b < BPW; b++) in_data[8*b +: 8] = bytes[i * BPW + b];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
    repeat (20) @(negedge clk);
    checks++;
    if (nout != NPIX || pixel_count != NPIX) begin failures++; $display("pixel count %0d", nout); end
    checks++;
    if (max_run < KP * W) begin failures++; $display("longest run %0d", max_run); end
    $display("pixels %0d, longest gap-free run %0d", nout, max_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
