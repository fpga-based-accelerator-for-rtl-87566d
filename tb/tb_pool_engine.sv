// tb_pool_engine: self-checking test of the 2x2 max-pool stage. Rows of
// W=6 pixels with MP=3 signed lanes arrive in groups of KP=2 rows with random
// gaps (the pool has no handshake of its own: it follows its producer beat
// by beat). Every output is compared with the maximum of its 2x2 window, the
// output count is checked, and the room/claim signals must pass straight
// through between the producer and the next layer.
// The published design only names pooling stages; the 2x2 max window
// follows the VGG16 pooling layers, and the pass-through of
// room claims is this design's choice and is checked as such.
module tb_pool_engine;
  import nn_pkg::*;
  localparam int W = 6, MP = 3, KP = 2, ROWS = 8;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = !clk;

  logic us_space, us_claim = 0, in_valid = 0, ds_space = 0, ds_claim, out_valid;
  act_t in_data [MP], out_data [MP];

  pool_engine #(.W(W), .MP(MP), .KP(KP)) dut (.*);

  int checks = 0, failures = 0;
  act_t img [ROWS][W][MP];
  act_t expq [$];
  int nout = 0;

  initial
    for (int h = 0; h < ROWS; h++)
      for (int x = 0; x < W; x++)
        for (int j = 0; j < MP; j++) img[h][x][j] = act_t'($urandom);

  initial
    for (int h = 0; h < ROWS / 2; h++)
      for (int x = 0; x < W / 2; x++)
        for (int j = 0; j < MP; j++) begin
          act_t v;
          v = img[2 * h][2 * x][j];
          if (img[2 * h][2 * x + 1][j] > v) v = img[2 * h][2 * x + 1][j];
          if (img[2 * h + 1][2 * x][j] > v) v = img[2 * h + 1][2 * x][j];
          if (img[2 * h + 1][2 * x + 1][j] > v) v = img[2 * h + 1][2 * x + 1][j];
          expq.push_back(v);
        end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (us_space !== ds_space || ds_claim !== us_claim) begin
      failures++; $display("space/claim not passed through");
    end
    if (out_valid) begin
      for (int j = 0; j < MP; j++) begin
        act_t e;
        e = expq.pop_front();
        checks++;
        if (out_data[j] !== e) begin
          failures++;
          $display("MISMATCH output %0d lane %0d: %0d expected %0d", nout, j, out_data[j], e);
        end
      end
      nout++;
    end
  end

  always @(negedge clk) begin
    ds_space <= $urandom_range(1);
    us_claim <= $urandom_range(1);
  end

  initial begin : main
    foreach (in_data[j]) in_data[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int h = 0; h < ROWS; h++)
      for (int x = 0; x < W; x++) begin
        repeat ($urandom_range(2)) @(negedge clk);
        in_valid = 1;
        foreach (in_data[j]) in_data[j] = img[h][x][j];
        @(negedge clk);
        in_valid = 0;
      end
    repeat (4) @(negedge clk);
    checks++;
    if (nout != ROWS / 2 * W / 2) begin failures++; $display("output count %0d", nout); end
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
