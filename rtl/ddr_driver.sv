// ddr_driver: moves data between the accelerator and the DDR interface. It
// feeds NRD read streams (the input activations and the weights of every
// convolution layer) and drains one write stream (the output activations).
//
// Read side. Every read client c owns a region of DDR, rd_base[c] ..
// rd_base[c] + rd_words[c] - 1 (word addresses), which the driver reads
// sequentially and from the start again when it reaches the end: the weights
// of a layer are needed once for every group of K rows, and a region of
// input frames can be refilled by the host. Each client has a FIFO of FDEP
// words. A round-robin arbiter issues a burst of up to BL words for a client
// whose FIFO has room for it, counting words already requested, so a burst
// never has to be refused; up to MAXOUT bursts may be in flight. Bursts end
// at the end of a region. The DDR side returns read data in request order,
// which a queue of burst tags (client, length) routes to the right FIFO.
//
// Write side. Output words are written one per transfer to consecutive
// addresses from wr_base, wrapping after wr_words.
//
// Nothing moves before start. Memory-side handshakes are valid/ready on the
// request and on write data, and a plain valid on read data (the DDR side
// must accept read data at any time, which the reserved FIFO room ensures).
//
// The published design names this driver and its job (fetch iact and
// weights through the DDR interface IP, send oact back); bursts, regions,
// arbitration and the simple memory-side protocol are this design's.
module ddr_driver #(
  parameter int unsigned NRD    = 4,
  parameter int unsigned DDR_W  = 512,
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned BL     = 16,
  parameter int unsigned FDEP   = 64,
  parameter int unsigned MAXOUT = 4,
  localparam int unsigned LW = $clog2(BL + 1),
  localparam int unsigned CW = (NRD > 1) ? $clog2(NRD) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic [ADDR_W-1:0] rd_base  [NRD],
  input  logic [ADDR_W-1:0] rd_words [NRD],
  input  logic [ADDR_W-1:0] wr_base,
  input  logic [ADDR_W-1:0] wr_words,
  // client read streams
  output logic [NRD-1:0]   cl_valid,
  input  logic [NRD-1:0]   cl_ready,
  output logic [DDR_W-1:0] cl_data [NRD],
  // client write stream
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [DDR_W-1:0] wr_data,
  // DDR interface side
  output logic              mem_rd_valid,
  input  logic              mem_rd_ready,
  output logic [ADDR_W-1:0] mem_rd_addr,
  output logic [LW-1:0]     mem_rd_len,
  input  logic              mem_rdata_valid,
  input  logic [DDR_W-1:0]  mem_rdata,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output logic [DDR_W-1:0]  mem_wr_data
);
  localparam int unsigned FW = $clog2(FDEP);
  localparam int unsigned TW = (MAXOUT > 1) ? $clog2(MAXOUT) : 1;

  logic running;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) running <= 1'b0;
    else if (start) running <= 1'b1;

  // ---------------- per-client state ----------------
  logic [DDR_W-1:0] fifo [NRD][FDEP];
  logic [FW-1:0] fwp [NRD];
  logic [FW-1:0] frp [NRD];
  int unsigned fcnt [NRD];      // words in the FIFO
  int unsigned resv [NRD];      // words in the FIFO or requested
  logic [ADDR_W-1:0] off [NRD]; // next word to request, within region

  // ---------------- burst tags ----------------
  logic [CW-1:0] tag_cl  [MAXOUT];
  logic [LW-1:0] tag_len [MAXOUT];
  logic [TW-1:0] twp, trp;
  int unsigned tcnt, rcv;

  // ---------------- arbiter ----------------
  logic [CW-1:0] rr, pick;
  logic found;
  logic [NRD-1:0] elig;
  logic [LW-1:0] blen;

  always_comb begin
    for (int c = 0; c < NRD; c++)
      elig[c] = running && (rd_words[c] != 0) && (resv[c] + BL <= FDEP);
    found = 1'b0;
    pick  = rr;
    for (int i = 0; i < NRD; i++) begin
      int unsigned c;
      c = (int'(rr) + i) % NRD;
      if (!found && elig[c]) begin
        found = 1'b1;
        pick  = CW'(c);
      end
    end
    blen = (rd_words[pick] - off[pick] < BL) ? LW'(rd_words[pick] - off[pick]) : LW'(BL);
  end

  assign mem_rd_valid = found && (tcnt < MAXOUT);
  assign mem_rd_addr  = rd_base[pick] + off[pick];
  assign mem_rd_len   = blen;

  logic issue;
  assign issue = mem_rd_valid && mem_rd_ready;

  // client outputs
  always_comb
    for (int c = 0; c < NRD; c++) begin
      cl_valid[c] = fcnt[c] != 0;
      cl_data[c]  = fifo[c][frp[c]];
    end

  logic [CW-1:0] rcl;
  logic tag_pop;
  logic [NRD-1:0] cl_push, cl_pop;
  assign rcl     = tag_cl[trp];
  assign tag_pop = mem_rdata_valid && (rcv + 1 == int'(tag_len[trp]));
  always_comb
    for (int c = 0; c < NRD; c++) begin
      cl_push[c] = mem_rdata_valid && (int'(rcl) == c);
      cl_pop[c]  = cl_valid[c] && cl_ready[c];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0; twp <= '0; trp <= '0; tcnt <= 0; rcv <= 0;
      for (int c = 0; c < NRD; c++) begin
        fwp[c] <= '0; frp[c] <= '0; fcnt[c] <= 0; resv[c] <= 0; off[c] <= '0;
      end
    end else begin
      if (issue) begin
        tag_cl[twp]  <= pick;
        tag_len[twp] <= blen;
        twp <= (int'(twp) == MAXOUT - 1) ? '0 : twp + 1'b1;
        off[pick] <= (off[pick] + ADDR_W'(blen) >= rd_words[pick]) ? '0 : off[pick] + ADDR_W'(blen);
        rr <= (int'(pick) == NRD - 1) ? '0 : pick + 1'b1;
      end
      if (mem_rdata_valid) begin
        fifo[rcl][fwp[rcl]] <= mem_rdata;
        fwp[rcl] <= fwp[rcl] + 1'b1;
        if (tag_pop) begin
          rcv     <= 0;
          trp     <= (int'(trp) == MAXOUT - 1) ? '0 : trp + 1'b1;
        end else begin
          rcv <= rcv + 1;
        end
      end
      tcnt <= tcnt + (issue ? 1 : 0) - (tag_pop ? 1 : 0);
      for (int c = 0; c < NRD; c++) begin
        if (cl_pop[c]) frp[c] <= frp[c] + 1'b1;
        fcnt[c] <= fcnt[c] + (cl_push[c] ? 1 : 0) - (cl_pop[c] ? 1 : 0);
        resv[c] <= resv[c] + ((issue && int'(pick) == c) ? int'(blen) : 0) - (cl_pop[c] ? 1 : 0);
      end
    end
  end

  // ---------------- write side ----------------
  logic [ADDR_W-1:0] woff;
  assign mem_wr_valid = running && wr_valid;
  assign wr_ready     = running && mem_wr_ready;
  assign mem_wr_addr  = wr_base + woff;
  assign mem_wr_data  = wr_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) woff <= '0;
    else if (mem_wr_valid && mem_wr_ready)
      woff <= (woff + 1 >= wr_words) ? '0 : woff + 1;

  a_fifo: assert property (@(posedge clk) disable iff (!rst_n) mem_rdata_valid |-> tcnt != 0);
endmodule
