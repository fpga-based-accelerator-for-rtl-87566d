// tb_conv_engine: self-checking test of one convolution layer engine at a
// small size with awkward ratios (C=5 channels written 3 at a time and read
// 2 at a time, M=6 output channels computed 4 at a time), run over three
// frames. A producer model claims and writes input rows, a weight stream
// repeats the layer's weights for every group of K rows with random gaps
// (forcing drain beats and waits), and a consumer model grants output room
// at random. Every output activation is compared with a direct convolution
// with zero padding, per-input-channel left shifts, bias, ReLU,
// per-output-channel right shift and saturation, computed here from the same
// random data. A final no-stall frame checks the published rate: one group of
// K rows every K*W*ceil(C/C')*ceil(M/M') cycles.
module tb_conv_engine;
  import nn_pkg::*;
  localparam int H = 8, W = 5, C = 5, M = 6, R = 3, S = 3;
  localparam int CP = 2, MP = 4, K = 2, KP = 2, MPP = 3, DDR_W = 128;
  localparam int NCC = (C + CP - 1) / CP, NMM = (M + MP - 1) / MP, NMW = (C + MPP - 1) / MPP;
  localparam int NW = MP * CP * R * S, BPW = DDR_W / 8, WPS = (NW + BPW - 1) / BPW;
  localparam int FRAMES = 3;
  localparam int TROW = K * W * NCC * NMM;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge, so that asynchronous resets act
  always #5 clk = !clk;

  logic wr_space, wr_claim, wr_valid, w_valid, w_ready, ds_space, ds_claim, out_valid, busy;
  act_t wr_data [MPP];
  logic [DDR_W-1:0] w_data;
  act_t out_data [MP];
  logic [31:0] stall_cycles, drain_beats;

  conv_engine #(.H(H), .W(W), .C(C), .M(M), .R(R), .S(S), .CP(CP), .MP(MP), .K(K),
                .KP(KP), .MPP(MPP), .DDR_W(DDR_W),
                .BIAS_FILE("tb/ce_bias.hex"), .LS_FILE("tb/ce_ls.hex"),
                .RS_FILE("tb/ce_rs.hex")) dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  // data
  act_t iact [FRAMES][H][W][C];
  wgt_t wt [M][C][R][S];
  logic [31:0] bias_m [M];
  logic [7:0] ls_c [C], rs_m [M];
  act_t expo [FRAMES][H][W][M];

  initial begin
    $readmemh("tb/ce_bias.hex", bias_m);
    $readmemh("tb/ce_ls.hex", ls_c);
    $readmemh("tb/ce_rs.hex", rs_m);
    for (int f = 0; f < FRAMES; f++)
      for (int h = 0; h < H; h++)
        for (int x = 0; x < W; x++)
          for (int c = 0; c < C; c++) iact[f][h][x][c] = act_t'($urandom_range(40) - 20);
    for (int m = 0; m < M; m++)
      for (int c = 0; c < C; c++)
        for (int r = 0; r < R; r++)
          for (int s = 0; s < S; s++) wt[m][c][r][s] = wgt_t'($urandom_range(30) - 15);
    for (int f = 0; f < FRAMES; f++)
      for (int h = 0; h < H; h++)
        for (int x = 0; x < W; x++)
          for (int m = 0; m < M; m++) begin
            longint acc;
            acc = longint'($signed(bias_m[m]));
            for (int c = 0; c < C; c++)
              for (int r = 0; r < R; r++)
                for (int s = 0; s < S; s++) begin
                  int hh, xx;
                  hh = h + r - 1; xx = x + s - 1;
                  if (hh >= 0 && hh < H && xx >= 0 && xx < W)
                    acc += longint'(int'(iact[f][hh][xx][c]) * int'(wt[m][c][r][s])) <<< ls_c[c];
                end
            if (acc < 0) acc = 0;
            acc = acc >>> rs_m[m];
            if (acc > 127) acc = 127;
            expo[f][h][x][m] = act_t'(acc);
          end
  end

  logic nostall;  // last frame: no random gaps

  // ---------------- producer of input rows ----------------
  initial begin
    wr_claim = 0; wr_valid = 0;
    foreach (wr_data[j]) wr_data[j] = '0;
    @(posedge rst_n);
    for (int f = 0; f < FRAMES; f++)
      for (int h0 = 0; h0 < H; h0 += KP) begin
        @(negedge clk);
        while (!wr_space) @(negedge clk);
        wr_claim = 1;
        @(negedge clk);
        wr_claim = 0;
        for (int mw = 0; mw < NMW; mw++)
          for (int k = 0; k < KP; k++)
            for (int x = 0; x < W; x++) begin
              wr_valid = 1;
              for (int j = 0; j < MPP; j++)
                wr_data[j] = (mw * MPP + j < C) ? iact[f][h0 + k][x][mw * MPP + j] : act_t'(0);
              @(negedge clk);
              wr_valid = 0;
            end
      end
  end

  // ---------------- weight stream ----------------
  initial begin
    w_valid = 0; w_data = '0;
    @(posedge rst_n);
    @(negedge clk);
    for (int f = 0; f < FRAMES; f++)
      for (int g = 0; g < H / K; g++)
        for (int mm = 0; mm < NMM; mm++)
          for (int cc = 0; cc < NCC; cc++)
            for (int wd = 0; wd < WPS; wd++) begin
              logic [DDR_W-1:0] word;
              for (int b = 0; b < BPW; b++) begin
                int idx, m, c, r, s;
                idx = wd * BPW + b;
                s = idx % S; r = (idx / S) % R; c = (idx / (S * R)) % CP; m = idx / (S * R * CP);
                m = mm * MP + m; c = cc * CP + c;
                word[8*b +: 8] = (idx < NW && m < M && c < C) ? wt[m][c][r][s] : 8'h00;
              end
              while (!nostall && $urandom_range(9) < 4) begin
                w_valid = 0;
                @(negedge clk);
              end
              w_valid = 1; w_data = word;
              @(posedge clk);
              while (!w_ready) @(posedge clk);
              @(negedge clk);
            end
    w_valid = 0;
  end

  // ---------------- consumer ----------------
  int claims = 0, space_denied = 0;
  always @(negedge clk) ds_space <= nostall ? 1'b1 : ($urandom_range(3) != 0);
  always @(posedge clk) begin
    if (ds_claim) begin
      claims++;
      if (!ds_space) begin failures++; $display("claim without space"); end
    end
    if (rst_n && !ds_space && !busy) space_denied++;
  end

  // output checker: order is frame, group, mm, k, x
  int of = 0, og = 0, omm = 0, ok = 0, ox = 0, nout = 0;
  always @(posedge clk) begin
    if (out_valid) begin
      for (int j = 0; j < MP; j++) begin
        int m;
        m = omm * MP + j;
        if (m < M) begin
          checks++;
          if (out_data[j] !== expo[of][og * K + ok][ox][m]) begin
            failures++;
            if (failures < 10)
              $display("MISMATCH f%0d row%0d x%0d m%0d got %0d exp %0d", of, og*K+ok, ox, m,
                       out_data[j], expo[of][og * K + ok][ox][m]);
          end
        end
      end
      if ($test$plusargs("trace")) $display("%0d out f%0d g%0d mm%0d k%0d x%0d : %0d %0d %0d %0d", cycle, of, og, omm, ok, ox, out_data[0], out_data[1], out_data[2], out_data[3]);
      nout++;
      if (ox != W - 1) ox++;
      else begin
        ox = 0;
        if (ok != K - 1) ok++;
        else begin
          ok = 0;
          if (omm != NMM - 1) omm++;
          else begin
            omm = 0;
            if (og != H / K - 1) og++;
            else begin og = 0; of++; end
          end
        end
      end
    end
  end

  // rate check in the stall-free frame
  int claim_cycle [$];
  always @(posedge clk) if (ds_claim) begin
    claim_cycle.push_back(cycle);
    if ($test$plusargs("trace")) $display("claim at %0d", cycle);
  end

  initial begin : main
    nostall = $test$plusargs("nostall");
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (of == FRAMES - 1);
    nostall = 1;
    wait (of == FRAMES);
    repeat (5) @(posedge clk);
    // groups of the last frame: claims (FRAMES-1)*H/K .. FRAMES*H/K-1
    for (int i = (FRAMES - 1) * H / K + 2; i < FRAMES * H / K; i++) begin
      checks++;
      if (claim_cycle[i] - claim_cycle[i - 1] != TROW) begin
        failures++;
        $display("group period %0d, expected %0d", claim_cycle[i] - claim_cycle[i - 1], TROW);
      end
    end
    checks++;
    if (nout != FRAMES * H * NMM * W) begin failures++; $display("output count %0d", nout); end
    checks++;
    if (drain_beats == 0) begin failures++; $display("no drain beats happened"); end
    checks++;
    if (space_denied == 0) begin failures++; $display("downstream never refused room"); end
    $display("drain beats %0d, idle cycles %0d, claims %0d", drain_beats, stall_cycles, claims);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: timeout, outputs %0d", nout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
