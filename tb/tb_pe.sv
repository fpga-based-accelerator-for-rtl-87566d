// tb_pe: self-checking test of one processing element. The testbench plays
// the controller for a frame of one row group (K = 2 rows of W = 6 columns)
// and two input-channel passes: it issues the beats with the flush and
// zeroMac masks, a drain beat at the end of each pass, and the delayed
// output tags (scratchpad address, first/last pass, rowSel with the top
// kernel row masked as top padding). Each output is compared with a direct
// 3x3 correlation with zero padding, per-channel left shifts, bias, ReLU,
// right shift and saturation.
// The PE structure checked here (left shifters, pipelined row accumulation,
// rowSel, psumSpad, bias, ReLU/right shift) is the published one; the exact
// beat timing is this design's.
module tb_pe;
  import nn_pkg::*;
  localparam int CP = 2, R = 3, S = 3, W = 6, K = 2, NP = 2, P = 1;

  logic clk = 0, rst_n = 1;
  always #5 clk = !clk;

  logic in_valid = 0, o_valid = 0, o_first = 0, o_last = 0;
  logic [S-1:0] flush = '0, zmac = '0;
  act_t act [R][CP];
  wgt_t wgt [CP][R][S];
  shamt_t ls [CP];
  logic [$clog2(K*W)-1:0] o_addr = '0;
  logic [R-1:0] o_rowsel = '0;
  psum_t bias;
  shamt_t rs;
  logic oact_valid;
  act_t oact;

  pe #(.CP(CP), .R(R), .S(S), .SPAD_DEPTH(K * W)) dut (.*);

  int checks = 0, failures = 0;

  // data: A[p][k][r][x][c] is the activation of kernel row r for output row k
  act_t   A [NP][K][R][W][CP];
  wgt_t   Wt [NP][CP][R][S];
  shamt_t LS [NP][CP];
  act_t   expo [K][W];
  logic [R-1:0] rsel [K];

  initial begin
    bias = psum_t'($urandom_range(400)) - 200;
    rs = 4;
    rsel[0] = 3'b110;  // kernel row 0 above the frame
    rsel[1] = 3'b111;
    for (int p = 0; p < NP; p++) begin
      for (int c = 0; c < CP; c++) begin
        LS[p][c] = shamt_t'($urandom_range(2));
        for (int r = 0; r < R; r++)
          for (int s = 0; s < S; s++) Wt[p][c][r][s] = wgt_t'($urandom_range(40) - 20);
      end
      for (int k = 0; k < K; k++)
        for (int r = 0; r < R; r++)
          for (int x = 0; x < W; x++)
            for (int c = 0; c < CP; c++) A[p][k][r][x][c] = act_t'($urandom_range(60) - 30);
    end
    for (int k = 0; k < K; k++)
      for (int x = 0; x < W; x++) begin
        longint acc;
        acc = bias;
        for (int p = 0; p < NP; p++)
          for (int r = 0; r < R; r++)
            if (rsel[k][r])
              for (int s = 0; s < S; s++)
                for (int c = 0; c < CP; c++)
                  if (x + s - P >= 0 && x + s - P < W)
                    acc += longint'(int'(A[p][k][r][x + s - P][c]) * int'(Wt[p][c][r][s])) <<< LS[p][c];
        if (acc < 0) acc = 0;
        acc = acc >>> rs;
        if (acc > 127) acc = 127;
        expo[k][x] = act_t'(acc);
      end
  end

  // beat issue with the controller's masks; the output of a beat's column
  // leaves the chain P beats later
  typedef struct { bit real_b; int k, x, p; } tag_t;
  tag_t prev_tag;

  task automatic beat(input bit real_b, input int p, input int k, input int x);
    for (int s = 0; s < S; s++) begin
      flush[s] = (x == 0) && (s >= 1) && (s <= P);
      zmac[s]  = (s > P) && (x < s - P);
    end
    if (real_b) begin
      for (int r = 0; r < R; r++)
        for (int c = 0; c < CP; c++) act[r][c] = A[p][k][r][x][c];
      wgt = Wt[p];
      ls  = LS[p];
    end
    in_valid = 1;
    // output side of the previous beat: the chain result is ready this cycle
    @(negedge clk);
    in_valid = 0;
    o_valid  = prev_tag.real_b;
    o_addr   = $bits(o_addr)'(prev_tag.k * W + prev_tag.x);
    o_first  = (prev_tag.p == 0);
    o_last   = (prev_tag.p == NP - 1);
    o_rowsel = rsel[prev_tag.k];
    prev_tag = '{real_b, k, x, p};
  endtask

  int got = 0;
  int ok_ = 0, ox_ = 0;
  always @(posedge clk) begin
    if (oact_valid) begin
      checks++;
      if (oact !== expo[ok_][ox_]) begin
        failures++;
        $display("MISMATCH k%0d x%0d got %0d exp %0d", ok_, ox_, oact, expo[ok_][ox_]);
      end
      got++;
      if (ox_ == W - 1) begin ox_ = 0; ok_++; end else ox_++;
    end
  end

  initial begin : main
    prev_tag = '{0, 0, 0, 0};
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      for (int k = 0; k < K; k++)
        for (int x = 0; x < W; x++) beat(1, p, k, x);
      for (int d = 0; d < P; d++) beat(0, p, 0, d);  // drain
      // one idle cycle between passes: the output of the drain beat
      @(negedge clk);
      o_valid = 0;
    end
    // the tag queue above delays outputs by one beat; P = 1 so that is exact
    repeat (4) @(negedge clk);
    checks++;
    if (got != K * W) begin failures++; $display("outputs %0d, expected %0d", got, K * W); end
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
