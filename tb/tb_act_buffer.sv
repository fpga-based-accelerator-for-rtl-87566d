// tb_act_buffer: self-checking test of the flexible activation buffer with
// write and read widths that do not divide each other (M'_{i-1} = 2 channels
// written per cycle, C' = 3 read per cycle, C = 7 channels) and a producer
// group of KP = 1 row against a reader group of K = 2 rows, over two frames.
// The producer writes as fast as the buffer lets it, so it is held back by
// wr_space; the reader waits for rd_grp_ready and then reads every
// (row, channel group, column) of the group at random pace. Each read word is
// compared with the frame data: rows inside the frame must match, channels
// past C must read 0.
// The row and channelBuffer counts are the published ones (plus the extra
// rows explained in act_buffer); the address mapping and credit handshake
// checked here are this design's.
module tb_act_buffer;
  import nn_pkg::*;
  localparam int H = 6, W = 4, C = 7, R = 3, K = 2, CP = 3, KP = 1, MPP = 2, P = 1;
  localparam int NCC = (C + CP - 1) / CP, NMW = (C + MPP - 1) / MPP, FRAMES = 2;

  logic clk = 0, rst_n = 1;
  always #5 clk = !clk;

  logic wr_space, wr_claim = 0, wr_valid = 0, rd_grp_ready, rd_grp_done = 0, rd_en = 0;
  act_t wr_data [MPP];
  logic [0:0] rd_k = '0;
  logic [$clog2(NCC)-1:0] rd_cc = '0;
  logic [$clog2(W)-1:0] rd_x = '0;
  act_t rd_data [R][CP];

  act_buffer #(.H(H), .W(W), .C(C), .R(R), .K(K), .CP(CP), .KP(KP), .MPP(MPP)) dut (.*);

  int checks = 0, failures = 0, space_waits = 0, ready_waits = 0;
  act_t img [FRAMES][H][W][C];

  initial
    for (int f = 0; f < FRAMES; f++)
      for (int h = 0; h < H; h++)
        for (int x = 0; x < W; x++)
          for (int c = 0; c < C; c++) img[f][h][x][c] = act_t'($urandom);

  // producer
  initial begin
    foreach (wr_data[j]) wr_data[j] = '0;
    @(posedge rst_n);
    for (int f = 0; f < FRAMES; f++)
      for (int h0 = 0; h0 < H; h0 += KP) begin
        @(negedge clk);
        while (!wr_space) begin space_waits++; @(negedge clk); end
        wr_claim = 1;
        @(negedge clk);
        wr_claim = 0;
        for (int mw = 0; mw < NMW; mw++)
          for (int k = 0; k < KP; k++)
            for (int x = 0; x < W; x++) begin
              wr_valid = 1;
              for (int j = 0; j < MPP; j++)
                wr_data[j] = (mw * MPP + j < C) ? img[f][h0 + k][x][mw * MPP + j] : act_t'(0);
              @(negedge clk);
              wr_valid = 0;
            end
      end
  end

  // reader
  initial begin : reader
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int g = 0; g < H / K; g++) begin
        @(negedge clk);
        while (!rd_grp_ready) begin ready_waits++; @(negedge clk); end
        for (int cc = 0; cc < NCC; cc++)
          for (int k = 0; k < K; k++)
            for (int x = 0; x < W; x++) begin
              rd_en = 1; rd_k = k[0:0]; rd_cc = cc[$bits(rd_cc)-1:0]; rd_x = x[$bits(rd_x)-1:0];
              rd_grp_done = (cc == NCC - 1) && (k == K - 1) && (x == W - 1);
              @(negedge clk);
              rd_en = 0; rd_grp_done = 0;
              for (int r = 0; r < R; r++) begin
                int row;
                row = g * K + k + r - P;
                for (int i = 0; i < CP; i++) begin
                  int c;
                  c = cc * CP + i;
                  if (row >= 0 && row < H) begin
                    checks++;
                    if (rd_data[r][i] !== ((c < C) ? img[f][row][x][c] : act_t'(0))) begin
                      failures++;
                      if (failures < 10)
                        $display("MISMATCH f%0d row%0d x%0d c%0d got %0d", f, row, x, c, rd_data[r][i]);
                    end
                  end
                end
              end
              repeat ($urandom_range(3)) @(negedge clk);
            end
      end
    checks++;
    if (space_waits == 0) begin failures++; $display("producer never held back"); end
    checks++;
    if (ready_waits == 0) begin failures++; $display("reader never waited"); end
    $display("space waits %0d, ready waits %0d", space_waits, ready_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
