// tb_conv_ctrl: self-checking test of the convolution controller on its own
// (H=4, W=3, C=4, M=4, C'=M'=2, K=2, 3x3 kernel) over two frames. The
// testbench grants the activation buffer, the weight banks and the next
// layer's room at random and checks:
//  - the read addresses follow the loop nest (group, mm, cc, k, x);
//  - a group starts only with grp_ready and ds_space, and claims once;
//  - a bank is used only when full and released once per pass;
//  - each beat's flush/zeroMac masks match its column, drain beats included;
//  - the output tags (o_addr, o_first, o_last, o_mm, o_rowsel) come in the
//    same order as the reads, one per real beat;
//  - with everything granted, a group of passes runs without a gap
//    (K*W*C/C'*M/M' cycles of reads in a row).
// The loop order and the K*W-cycle pass follow the published dataflow; the
// mask equations, drain beats and handshakes checked here are this design's.
module tb_conv_ctrl;
  localparam int H = 4, W = 3, C = 4, M = 4, R = 3, S = 3, CP = 2, MP = 2, K = 2;
  localparam int NCC = C / CP, NMM = M / MP, NG = H / K, FRAMES = 2;
  localparam int GROUP_BEATS = NMM * NCC * K * W;

  logic clk = 0, rst_n = 1;
  always #5 clk = !clk;

  logic grp_ready = 0, grp_done, rd_en, ds_space = 0, ds_claim;
  logic [0:0] rd_k, rd_cc, o_mm;
  logic [1:0] rd_x;
  logic [1:0] wfull = '0;
  logic wsel, wrel, wrel_bank, pe_valid, o_valid, o_first, o_last, busy;
  logic [S-1:0] flush, zmac;
  logic [0:0] ls_cc;
  logic [2:0] o_addr;
  logic [R-1:0] o_rowsel;
  logic [31:0] stall_cycles, drain_beats;

  conv_ctrl #(.H(H), .W(W), .C(C), .M(M), .R(R), .S(S), .CP(CP), .MP(MP), .K(K)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // expected read sequence and output tags
  typedef struct packed { int g, mm, cc, k, x; } pos_t;
  pos_t exp_rd [$];
  pos_t exp_out [$];
  initial
    for (int f = 0; f < FRAMES; f++)
      for (int g = 0; g < NG; g++)
        for (int mm = 0; mm < NMM; mm++)
          for (int cc = 0; cc < NCC; cc++)
            for (int k = 0; k < K; k++)
              for (int x = 0; x < W; x++) begin
                exp_rd.push_back('{g, mm, cc, k, x});
                exp_out.push_back('{g, mm, cc, k, x});
              end

  logic allgo;
  // environment: weight banks fill some cycles after they are released
  int bank_timer [2];
  always @(posedge clk) begin
    for (int b = 0; b < 2; b++) begin
      if (wrel && wrel_bank == b[0]) begin
        chk(wfull[b], "release of an empty bank");
        wfull[b] <= 1'b0;
        bank_timer[b] = allgo ? 1 : 1 + $urandom_range(20);
      end else if (!wfull[b]) begin
        if (bank_timer[b] > 0) bank_timer[b]--;
        if (bank_timer[b] == 0) wfull[b] <= 1'b1;
      end
    end
  end
  always @(negedge clk) begin
    ds_space  <= allgo || ($urandom_range(3) != 0);
    grp_ready <= (nclaim < FRAMES * NG) && (allgo || ($urandom_range(2) != 0));
  end

  // beat checker
  int nrd = 0, nout = 0, ngrp = 0, nclaim = 0, run_len = 0, max_run = 0;
  logic first_of_group;
  int bxq [$];
  always @(posedge clk) if (rst_n) begin
    if (rd_en) begin
      pos_t e;
      e = exp_rd.pop_front();
      chk(rd_k == e.k[0:0] && rd_cc == e.cc[0:0] && rd_x == e.x[1:0], "read order");
      if (e.mm == 0 && e.cc == 0 && e.k == 0 && e.x == 0) begin
        chk(grp_ready && ds_space && ds_claim, "group start conditions");
      end else chk(!ds_claim, "claim outside group start");
      chk(wfull[dut.bank], "beat on an empty bank");
      chk(grp_done == (e.mm == NMM-1 && e.cc == NCC-1 && e.k == K-1 && e.x == W-1), "grp_done");
      bxq.push_back(e.x);
      nrd++;
      run_len++;
      if (run_len > max_run && allgo) max_run = run_len;
    end else begin
      run_len = 0;
      if (dut.drain) bxq.push_back(-1 - int'(dut.bx));  // drain beat
    end
    if (pe_valid) begin
      int bx;
      bx = bxq.pop_front();
      if (bx < 0) bx = -1 - bx;
      for (int s = 0; s < S; s++) begin
        chk(flush[s] == (bx == 0 && s >= 1 && s <= 1), "flush mask");
        chk(zmac[s] == (s > 1 && bx < s - 1), "zeroMac mask");
      end
    end
    if (o_valid) begin
      pos_t e;
      int row0;
      e = exp_out.pop_front();
      row0 = e.g * K + e.k - 1;
      chk(o_addr == 3'(e.k * W + e.x), "o_addr");
      chk(o_first == (e.cc == 0) && o_last == (e.cc == NCC - 1) && o_mm == e.mm[0:0], "o_first/o_last/o_mm");
      for (int r = 0; r < R; r++) chk(o_rowsel[r] == (row0 + r >= 0 && row0 + r < H), "o_rowsel");
      nout++;
    end
    if (ds_claim) nclaim++;
    if (grp_done) ngrp++;
  end

  initial begin : main
    allgo = 0;
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (nrd == NG * GROUP_BEATS);           // first frame, random grants
    allgo = 1;
    wait (nrd == FRAMES * NG * GROUP_BEATS);  // second frame, all granted
    repeat (10) @(posedge clk);
    chk(nout == FRAMES * NG * GROUP_BEATS, "number of outputs");
    chk(nclaim == FRAMES * NG && ngrp == FRAMES * NG, "claims and group ends");
    chk(max_run >= GROUP_BEATS, "gap-free group when all granted");
    chk(drain_beats != 0, "drain beats happened");
    $display("beats %0d outputs %0d drains %0d longest run %0d", nrd, nout, drain_beats, max_run);
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
