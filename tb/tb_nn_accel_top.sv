// tb_nn_accel_top: end-to-end test of the whole accelerator at a reduced
// size: 8x8 frames of 3 channels through conv0 (3->4), conv1 (4->4), a 2x2
// max pool and conv3 (4->4), with C'/M' smaller than the channel counts so
// that every engine loops over channel groups, and 128-bit DDR words.
//
// A behavioural DDR model stores the input frames and the three weight
// regions, accepts read requests at random, returns the words in order after
// a random latency with random gaps, and accepts writes at random. Every
// output byte written to DDR is compared with a reference computed here
// (convolution with zero padding, per-input-channel left shift, bias, ReLU,
// per-output-channel right shift, saturation; 2x2 max pool). Four frames run
// back to back; the last one with a DDR that is always ready, where the
// bottleneck layer (conv1) must claim a new group every K*W*C/C'*M/M'
// cycles, the published per-row time.
//
// The test counts how often each flow-control mechanism took place and
// fails any that never did: engine idle cycles (stalls), drain beats, room
// refused between layers and at the output buffer, DDR read-request and
// write backpressure, weight regions re-read for every row group, and a
// frame following a frame.
// The layer pipeline, the balanced per-row time and the weight re-loading
// per row group follow the published architecture; the reduced sizes,
// handshakes and the memory model are this design's.
module tb_nn_accel_top;
  import nn_pkg::*;
  localparam int DDR_W = 128, BPW = DDR_W / 8, ADDR_W = 32;
  localparam int H0 = 8, W0 = 8, C0 = 3;
  localparam int M0 = 4, CP0 = 3, MP0 = 2, K0 = 2;
  localparam int M1 = 4, CP1 = 2, MP1 = 2, K1 = 2;
  localparam int M3 = 4, CP3 = 2, MP3 = 2, K3 = 1;
  localparam int H3 = H0 / 2, W3 = W0 / 2;
  localparam int FRAMES = 4;
  localparam int IN_WORDS = H0 * W0 * C0 * FRAMES / BPW;
  localparam int OUT_WORDS = H3 * W3 * M3 / BPW;  // per frame
  localparam int T1 = K1 * W0 * (M0 / CP1) * (M1 / MP1);  // conv1 cycles per group
  localparam int BASE_IN = 0, BASE_W0 = 256, BASE_W1 = 512, BASE_W3 = 768, BASE_OUT = 4096;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = !clk;

  logic start = 0;
  logic [ADDR_W-1:0] rd_base [4], rd_words [4], wr_base, wr_words;
  logic mem_rd_valid, mem_rd_ready = 0, mem_rdata_valid = 0, mem_wr_valid, mem_wr_ready = 0;
  logic [ADDR_W-1:0] mem_rd_addr, mem_wr_addr;
  logic [4:0] mem_rd_len;
  logic [DDR_W-1:0] mem_rdata = '0, mem_wr_data;
  logic [31:0] out_count, in_pixels, stall0, stall1, stall3, drain0, drain1, drain3;
  logic busy0, busy1, busy3;

  nn_accel_top #(
    .DDR_W(DDR_W), .ADDR_W(ADDR_W), .H0(H0), .W0(W0), .C0(C0),
    .M0(M0), .CP0(CP0), .MP0(MP0), .K0(K0),
    .M1(M1), .CP1(CP1), .MP1(MP1), .K1(K1),
    .M3(M3), .CP3(CP3), .MP3(MP3), .K3(K3), .OUT_FD(2),
    .BIAS0_FILE("tb/top_b0.hex"), .LS0_FILE("tb/top_l0.hex"), .RS0_FILE("tb/top_r0.hex"),
    .BIAS1_FILE("tb/top_b1.hex"), .LS1_FILE("tb/top_l1.hex"), .RS1_FILE("tb/top_r1.hex"),
    .BIAS3_FILE("tb/top_b3.hex"), .LS3_FILE("tb/top_l3.hex"), .RS3_FILE("tb/top_r3.hex")
  ) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle++;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  // ---------------- reference model ----------------
  typedef int arr_t [];
  function automatic arr_t conv(input int H, W, C, M, input arr_t in, wt,
                                input arr_t b, ls, rs);
    arr_t o = new[H * W * M];
    for (int h = 0; h < H; h++)
      for (int x = 0; x < W; x++)
        for (int m = 0; m < M; m++) begin
          longint acc;
          acc = b[m];
          for (int c = 0; c < C; c++)
            for (int r = 0; r < 3; r++)
              for (int s = 0; s < 3; s++) begin
                int hh, xx;
                hh = h + r - 1; xx = x + s - 1;
                if (hh >= 0 && hh < H && xx >= 0 && xx < W)
                  acc += longint'(in[(hh * W + xx) * C + c] * wt[((m * C + c) * 3 + r) * 3 + s]) <<< ls[c];
              end
          if (acc < 0) acc = 0;
          acc = acc >>> rs[m];
          if (acc > 127) acc = 127;
          o[(h * W + x) * M + m] = int'(acc);
        end
    return o;
  endfunction

  function automatic arr_t pool(input int H, W, C, input arr_t in);
    arr_t o = new[(H / 2) * (W / 2) * C];
    for (int h = 0; h < H / 2; h++)
      for (int x = 0; x < W / 2; x++)
        for (int c = 0; c < C; c++) begin
          int v;
          v = in[((2 * h) * W + 2 * x) * C + c];
          for (int d = 1; d < 4; d++) begin
            int u;
            u = in[((2 * h + d / 2) * W + 2 * x + d % 2) * C + c];
            if (u > v) v = u;
          end
          o[(h * W / 2 + x) * C + c] = v;
        end
    return o;
  endfunction

  logic [DDR_W-1:0] mem [int];
  arr_t wt0, wt1, wt3;
  logic [7:0] exp_out [$];  // expected output byte stream, all frames

  // pack a layer's weights the way its engine reads them
  task automatic pack_weights(input int base, C, M, CP, MP, input arr_t wt, output int words);
    int nw, wps, a;
    nw = MP * CP * 9; wps = (nw + BPW - 1) / BPW; a = base;
    for (int mm = 0; mm < M / MP; mm++)
      for (int cc = 0; cc < (C + CP - 1) / CP; cc++)
        for (int wd = 0; wd < wps; wd++) begin
          logic [DDR_W-1:0] word;
          for (int b = 0; b < BPW; b++) begin
            int idx, m, c, r, s;
            idx = wd * BPW + b;
            s = idx % 3; r = (idx / 3) % 3; c = (idx / 9) % CP; m = idx / (9 * CP);
            m = mm * MP + m; c = cc * CP + c;
            word[8*b +: 8] = (idx < nw && m < M && c < C) ? 8'(wt[((m * C + c) * 3 + r) * 3 + s]) : 8'h00;
          end
          mem[a++] = word;
        end
    words = a - base;
  endtask

  initial begin : setup
    logic [31:0] fb0 [4], fb1 [4], fb3 [4], fl0 [3], fl1 [4], fl3 [4], fr0 [4], fr1 [4], fr3 [4];
    arr_t b0, b1, b3, l0, l1, l3, r0, r1, r3;
    logic [7:0] inbytes [$];
    int nw0, nw1, nw3;
    $readmemh("tb/top_b0.hex", fb0); $readmemh("tb/top_l0.hex", fl0); $readmemh("tb/top_r0.hex", fr0);
    $readmemh("tb/top_b1.hex", fb1); $readmemh("tb/top_l1.hex", fl1); $readmemh("tb/top_r1.hex", fr1);
    $readmemh("tb/top_b3.hex", fb3); $readmemh("tb/top_l3.hex", fl3); $readmemh("tb/top_r3.hex", fr3);
    b0 = new[4]; b1 = new[4]; b3 = new[4]; l0 = new[3]; l1 = new[4]; l3 = new[4];
    r0 = new[4]; r1 = new[4]; r3 = new[4];
    for (int i = 0; i < 4; i++) begin
      b0[i] = int'($signed(fb0[i])); b1[i] = int'($signed(fb1[i])); b3[i] = int'($signed(fb3[i]));
      l1[i] = int'(fl1[i]); l3[i] = int'(fl3[i]);
      r0[i] = int'(fr0[i]); r1[i] = int'(fr1[i]); r3[i] = int'(fr3[i]);
      if (i < 3) l0[i] = int'(fl0[i]);
    end
    wt0 = new[M0 * C0 * 9]; wt1 = new[M1 * M0 * 9]; wt3 = new[M3 * M1 * 9];
    foreach (wt0[i]) wt0[i] = $urandom_range(30) - 15;
    foreach (wt1[i]) wt1[i] = $urandom_range(30) - 15;
    foreach (wt3[i]) wt3[i] = $urandom_range(30) - 15;
    for (int f = 0; f < FRAMES; f++) begin
      arr_t a0, a1, a2, a3, a4;
      a0 = new[H0 * W0 * C0];
      foreach (a0[i]) begin
        a0[i] = $urandom_range(50) - 10;
        inbytes.push_back(8'(a0[i]));
      end
      a1 = conv(H0, W0, C0, M0, a0, wt0, b0, l0, r0);
      a2 = conv(H0, W0, M0, M1, a1, wt1, b1, l1, r1);
      a3 = pool(H0, W0, M1, a2);
      a4 = conv(H3, W3, M1, M3, a3, wt3, b3, l3, r3);
      // conv3 output order: row, output-channel group, column, lane
      for (int h = 0; h < H3; h++)
        for (int mm = 0; mm < M3 / MP3; mm++)
          for (int x = 0; x < W3; x++)
            for (int j = 0; j < MP3; j++) exp_out.push_back(8'(a4[(h * W3 + x) * M3 + mm * MP3 + j]));
    end
    for (int i = 0; i < IN_WORDS; i++)
      for (int b = 0; b < BPW; b++) mem[BASE_IN + i][8*b +: 8] = inbytes[i * BPW + b];
    pack_weights(BASE_W0, C0, M0, CP0, MP0, wt0, nw0);
    pack_weights(BASE_W1, M0, M1, CP1, MP1, wt1, nw1);
    pack_weights(BASE_W3, M1, M3, CP3, MP3, wt3, nw3);
    rd_base[0] = BASE_IN; rd_words[0] = IN_WORDS;
    rd_base[1] = BASE_W0; rd_words[1] = nw0;
    rd_base[2] = BASE_W1; rd_words[2] = nw1;
    rd_base[3] = BASE_W3; rd_words[3] = nw3;
    wr_base = BASE_OUT; wr_words = 1 << 20;
  end

  // ---------------- DDR model ----------------
  logic fast = 0;
  typedef struct { int addr, len, due; } req_t;
  req_t rq [$];
  int nrd_stall = 0, nwr_stall = 0, wrap_reads = 0, out_words = 0;
  int first_req [4] = '{-1, -1, -1, -1};

  always @(negedge clk) begin
    mem_rd_ready <= fast || ($urandom_range(3) != 0);
    mem_wr_ready <= fast || ($urandom_range(2) == 0);
    mem_rdata_valid <= 1'b0;
    if (rq.size() != 0 && rq[0].due <= cycle && (fast || $urandom_range(4) != 0)) begin
      mem_rdata_valid <= 1'b1;
      mem_rdata <= mem.exists(rq[0].addr) ? mem[rq[0].addr] : '0;
      rq[0].addr++;
      rq[0].len--;
      if (rq[0].len == 0) void'(rq.pop_front());
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (mem_rd_valid) begin
      if (!mem_rd_ready) nrd_stall++;
      else begin
        req_t q;
        q.addr = int'(mem_rd_addr); q.len = int'(mem_rd_len);
        q.due = cycle + (fast ? 4 : 4 + $urandom_range(20));
        rq.push_back(q);
        for (int c = 1; c < 4; c++)
          if (mem_rd_addr == rd_base[c]) begin
            if (first_req[c] >= 0) wrap_reads++;
            first_req[c] = cycle;
          end
      end
    end
    if (mem_wr_valid) begin
      if (!mem_wr_ready) nwr_stall++;
      else begin
        chk(mem_wr_addr == ADDR_W'(BASE_OUT + out_words), "output address");
        for (int b = 0; b < BPW; b++) begin
          int i;
          i = out_words * BPW + b;
          if (i < exp_out.size()) begin
            checks++;
            if (mem_wr_data[8*b +: 8] !== exp_out[i]) begin
              failures++;
              if (failures < 12)
                $display("MISMATCH output byte %0d (frame %0d): got %0d expected %0d", i,
                         i / (H3 * W3 * M3), $signed(mem_wr_data[8*b +: 8]), $signed(exp_out[i]));
            end
          end
        end
        out_words++;
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int out_refused = 0, layer_refused = 0;
  int c1_claims [$];
  always @(posedge clk) if (rst_n && start) begin
    if (!dut.u_out.us_space) out_refused++;
    if (!dut.a1_space || !dut.a2_space || !dut.a3_space) layer_refused++;
    if (dut.a2_claim) c1_claims.push_back(cycle);
  end

  initial begin : main
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    start = 1;
    wait (out_words == (FRAMES - 1) * OUT_WORDS);
    fast = 1;
    wait (out_words == FRAMES * OUT_WORDS);
    repeat (5) @(posedge clk);
    // conv1 claims of the last frame: indices (FRAMES-1)*G .. FRAMES*G-1
    for (int i = (FRAMES - 1) * H0 / K1 + 1; i < FRAMES * H0 / K1; i++)
      chk(c1_claims[i] - c1_claims[i - 1] == T1, $sformatf("conv1 group period %0d, expected %0d",
          c1_claims[i] - c1_claims[i - 1], T1));
    chk(stall0 + stall1 + stall3 != 0, "no engine ever stalled");
    chk(drain0 + drain1 + drain3 != 0, "no drain beats");
    chk(layer_refused != 0, "room between layers never refused");
    chk(out_refused != 0, "output buffer never refused room");
    chk(nrd_stall != 0, "DDR never held back a read request");
    chk(nwr_stall != 0, "DDR never held back a write");
    chk(wrap_reads != 0, "weights never re-read");
    chk(out_words == FRAMES * OUT_WORDS, "frames completed");
    begin
      int nz = 0;
      foreach (exp_out[i]) if (exp_out[i] != 0) nz++;
      chk(nz * 4 >= exp_out.size(), "reference output mostly zero");
      $display("nonzero expected output bytes %0d of %0d", nz, exp_out.size());
    end
    $display("stalls %0d/%0d/%0d drains %0d/%0d/%0d layer-refused %0d out-refused %0d",
             stall0, stall1, stall3, drain0, drain1, drain3, layer_refused, out_refused);
    $display("rd-req held %0d wr held %0d weight re-reads %0d output words %0d cycles %0d",
             nrd_stall, nwr_stall, wrap_reads, out_words, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout, output words %0d", out_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
