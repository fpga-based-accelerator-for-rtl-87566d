// tb_act_out_buf: self-checking test of the output activation buffer. The
// last layer model claims room for a group of GROUP_BYTES bytes only while
// us_space is high, then writes the group as MPL-lane beats with random
// gaps; the DDR side takes words at random. Checks: bytes are packed into
// DDR words in arrival order, no word is lost or duplicated, claims are
// refused while the FIFO cannot take a whole group (observed at least once),
// and out_count counts the activations.
// Packing order and room check are this design's choices; the output
// counter follows the published demo system.
module tb_act_out_buf;
  import nn_pkg::*;
  localparam int MPL = 2, GROUP_BYTES = 16, FD = 4, DDR_W = 64, BPW = DDR_W / 8, NGRP = 12;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = !clk;

  logic us_space, us_claim = 0, in_valid = 0, out_valid, out_ready = 0;
  act_t in_data [MPL];
  logic [DDR_W-1:0] out_data;
  logic [31:0] out_count;

  act_out_buf #(.MPL(MPL), .GROUP_BYTES(GROUP_BYTES), .FD(FD), .DDR_W(DDR_W)) dut (.*);

  int checks = 0, failures = 0, refused = 0, nword = 0;
  logic [7:0] bytes [NGRP * GROUP_BYTES];
  initial foreach (bytes[i]) bytes[i] = 8'($urandom);

  always @(negedge clk) out_ready <= ($urandom_range(3) == 0);

  always @(posedge clk) if (rst_n) begin
    if (!us_space) refused++;
    if (out_valid && out_ready) begin
      for (int b = 0; b < BPW; b++) begin
        checks++;
        if (out_data[8*b +: 8] !== bytes[nword * BPW + b]) begin
          failures++; $display("MISMATCH word %0d byte %0d", nword, b);
        end
      end
      nword++;
    end
  end

  initial begin : main
    foreach (in_data[j]) in_data[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < NGRP; g++) begin
      while (!us_space) @(negedge clk);
      us_claim = 1;
      @(negedge clk);
      us_claim = 0;
      for (int i = 0; i < GROUP_BYTES / MPL; i++) begin
        repeat ($urandom_range(1)) @(negedge clk);
        in_valid = 1;
        for (int j = 0; j < MPL; j++) in_data[j] = act_t'(bytes[(g * GROUP_BYTES / MPL + i) * MPL + j]);
        @(negedge clk);
        in_valid = 0;
      end
    end
    while (nword < NGRP * GROUP_BYTES / BPW) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (nword != NGRP * GROUP_BYTES / BPW) begin failures++; $display("words %0d", nword); end
    checks++;
    if (out_count != NGRP * GROUP_BYTES) begin failures++; $display("out_count %0d", out_count); end
    checks++;
    if (refused == 0) begin failures++; $display("room never refused"); end
    $display("words %0d, cycles without room %0d", nword, refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
