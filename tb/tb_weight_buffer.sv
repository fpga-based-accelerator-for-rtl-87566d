// tb_weight_buffer: self-checking test of the double-banked weight buffer.
// Eight weight sets of M'xC'xRxS = 2x2x3x3 = 36 bytes are streamed as 64-bit
// words (five words per set, the last one half padding). A consumer model
// takes the banks in turn: it waits until its bank is full, compares all 36
// weights with the set it expects, holds the bank for a random time and
// releases it. The test also checks that the loader is held back
// (in_ready low) while both banks are full.
// The published design gives the buffer's job (keep weights, unpack DDR
// words); the two banks and the byte order are this design's.
module tb_weight_buffer;
  import nn_pkg::*;
  localparam int MP = 2, CP = 2, R = 3, S = 3, DDR_W = 64;
  localparam int NW = MP * CP * R * S, BPW = DDR_W / 8, WPS = (NW + BPW - 1) / BPW, NSET = 8;

  logic clk = 0, rst_n = 1;
  always #5 clk = !clk;

  logic in_valid = 0, in_ready, rd_sel = 0, rel = 0, rel_bank = 0;
  logic [DDR_W-1:0] in_data = '0;
  logic [1:0] full;
  wgt_t wgt [MP][CP][R][S];

  weight_buffer #(.MP(MP), .CP(CP), .R(R), .S(S), .DDR_W(DDR_W)) dut (.*);

  int checks = 0, failures = 0, held = 0;
  wgt_t sets [NSET][NW];

  initial
    for (int n = 0; n < NSET; n++)
      for (int i = 0; i < NW; i++) sets[n][i] = wgt_t'($urandom);

  // loader
  initial begin
    @(posedge rst_n);
    @(negedge clk);
    for (int n = 0; n < NSET; n++)
      for (int wd = 0; wd < WPS; wd++) begin
        for (int b = 0; b < BPW; b++)
          in_data[8*b +: 8] = (wd * BPW + b < NW) ? sets[n][wd * BPW + b] : 8'hEE;
        in_valid = 1;
        @(posedge clk);
        while (!in_ready) begin held++; @(posedge clk); end
        @(negedge clk);
        in_valid = 0;
      end
  end

  initial begin : consumer
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NSET; n++) begin
      rd_sel = n[0];
      while (!full[rd_sel]) @(negedge clk);
      repeat ($urandom_range(12)) @(negedge clk);
      for (int m = 0; m < MP; m++)
        for (int c = 0; c < CP; c++)
          for (int r = 0; r < R; r++)
            for (int s = 0; s < S; s++) begin
              checks++;
              if (wgt[m][c][r][s] !== sets[n][((m * CP + c) * R + r) * S + s]) begin
                failures++;
                $display("MISMATCH set%0d m%0d c%0d r%0d s%0d", n, m, c, r, s);
              end
            end
      rel = 1; rel_bank = rd_sel;
      @(negedge clk);
      rel = 0;
    end
    checks++;
    if (held == 0) begin failures++; $display("loader never held back"); end
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
