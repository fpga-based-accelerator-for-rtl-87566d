// tb_ddr_driver: self-checking test of the DDR driver with three read
// clients and the write stream. A memory model accepts requests at random,
// returns data in order after a random latency, and accepts writes at
// random; the clients take words at random. Checks: every client receives
// its region word by word in address order and again from the start after
// the end (regions of 37, 5 and 20 words, so bursts are cut at region ends);
// no request is longer than BL; at most MAXOUT bursts are in flight; nothing
// is requested before start; written words land at consecutive addresses
// from wr_base and wrap after wr_words. With a memory that always answers
// at once and clients always ready, one word per cycle is delivered.
// Regions, bursts and the memory-side protocol are this design's own; the
// published design only assigns the driver its job.
module tb_ddr_driver;
  localparam int NRD = 3, DDR_W = 32, ADDR_W = 16, BL = 8, FDEP = 16, MAXOUT = 3;
  localparam int LW = $clog2(BL + 1);

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = !clk;

  logic start = 0;
  logic [ADDR_W-1:0] rd_base [NRD], rd_words [NRD], wr_base, wr_words;
  logic [NRD-1:0] cl_valid, cl_ready = '0;
  logic [DDR_W-1:0] cl_data [NRD];
  logic wr_valid = 0, wr_ready;
  logic [DDR_W-1:0] wr_data = '0;
  logic mem_rd_valid, mem_rd_ready = 0, mem_rdata_valid = 0, mem_wr_valid, mem_wr_ready = 0;
  logic [ADDR_W-1:0] mem_rd_addr, mem_wr_addr;
  logic [LW-1:0] mem_rd_len;
  logic [DDR_W-1:0] mem_rdata = '0, mem_wr_data;

  ddr_driver #(.NRD(NRD), .DDR_W(DDR_W), .ADDR_W(ADDR_W), .BL(BL), .FDEP(FDEP), .MAXOUT(MAXOUT)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle++;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s at %0d", what, cycle); end
  endtask

  // memory: word at address a holds {a, ~a}
  function automatic logic [DDR_W-1:0] mword(input int a);
    return {16'(a), ~16'(a)};
  endfunction

  typedef struct { int addr, len, due; } req_t;
  req_t rq [$];
  int inflight = 0, fast = 0;
  always @(negedge clk) begin
    mem_rd_ready <= fast || ($urandom_range(2) != 0);
    mem_wr_ready <= fast || ($urandom_range(1) != 0);
    cl_ready <= fast ? '1 : NRD'($urandom);
    mem_rdata_valid <= 1'b0;
    if (rq.size() != 0 && rq[0].due <= cycle && (fast || $urandom_range(3) != 0)) begin
      mem_rdata_valid <= 1'b1;
      mem_rdata <= mword(rq[0].addr);
      rq[0].addr++;
      rq[0].len--;
      if (rq[0].len == 0) begin void'(rq.pop_front()); inflight--; end
    end
  end

  int got [NRD] = '{0, 0, 0};
  int nwr = 0, fast_words = 0, fast_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (mem_rd_valid) chk(start, "request before start");
    if (mem_rd_valid && mem_rd_ready) begin
      req_t q;
      chk(mem_rd_len != 0 && mem_rd_len <= BL, "burst length");
      q.addr = int'(mem_rd_addr); q.len = int'(mem_rd_len); q.due = cycle + (fast ? 1 : $urandom_range(12));
      rq.push_back(q);
      inflight++;
      chk(inflight <= MAXOUT, "bursts in flight");
    end
    for (int c = 0; c < NRD; c++)
      if (cl_valid[c] && cl_ready[c]) begin
        chk(cl_data[c] == mword(int'(rd_base[c]) + got[c] % int'(rd_words[c])), $sformatf("client %0d word %0d", c, got[c]));
        got[c]++;
      end
    if (fast) begin
      fast_cycles++;
      for (int c = 0; c < NRD; c++) if (cl_valid[c] && cl_ready[c]) fast_words++;
    end
    if (mem_wr_valid && mem_wr_ready) begin
      chk(mem_wr_addr == wr_base + ADDR_W'(nwr % int'(wr_words)), "write address");
      chk(mem_wr_data == DDR_W'(nwr * 3 + 1), "write data");
      nwr++;
    end
  end

  initial begin : writer
    @(posedge start);
    for (int i = 0; i < 30; i++) begin
      @(negedge clk);
      wr_valid = 1; wr_data = DDR_W'(i * 3 + 1);
      @(posedge clk);
      while (!wr_ready) @(posedge clk);
      @(negedge clk);
      wr_valid = 0;
      repeat ($urandom_range(2)) @(negedge clk);
    end
  end

  initial begin : main
    rd_base[0] = 16'h0100; rd_words[0] = 37;
    rd_base[1] = 16'h0200; rd_words[1] = 5;
    rd_base[2] = 16'h0300; rd_words[2] = 20;
    wr_base = 16'h1000; wr_words = 12;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    start = 1;
    while (got[0] < 100 || got[1] < 100 || got[2] < 100 || nwr < 30) @(negedge clk);
    fast = 1;
    repeat (60) @(negedge clk);
    fast_words = 0; fast_cycles = 0;
    repeat (200) @(negedge clk);
    chk(fast_words * 10 >= fast_cycles * 9, "one word per cycle with a fast memory");
    $display("words %0d %0d %0d writes %0d, fast phase %0d words in %0d cycles",
             got[0], got[1], got[2], nwr, fast_words, fast_cycles);
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
