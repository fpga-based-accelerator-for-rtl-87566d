// act_buffer: the flexible activation buffer between two layers. It takes
// the output activations of the previous layer, M'_{i-1} channels per cycle,
// and feeds the convolution engine of this layer C'_i x R activations per
// cycle, however different M'_{i-1} and C'_i are.
//
// Organisation. There are NR = KP + R + K - 1 + P rowBuffers used as a
// circular queue of frame rows: R + K - 1 rows are read by the current group
// of K output rows while the next KP rows are written (KP is the row
// parallelism of the producer, K that of this layer). For KP = K the
// published count is R + 2K - 1; this design keeps P = (R-1)/2 rows more,
// because a producer's row groups start at multiples of KP while a reading
// group starts P rows earlier (top padding), so with exactly R + 2K - 1 rows
// the next group's last row could not be written in time and every second
// group would wait for the producer. Each rowBuffer is split into NCB = max(C', M'_{i-1})
// channelBuffers, one memory with one read and one write port each. Channel c
// of column x lives in channelBuffer (c mod NCB) at address
// (c div NCB) * W + x. Any M'_{i-1} consecutive channels therefore land in
// different channelBuffers (one write each per cycle) and any C' consecutive
// channels come from different channelBuffers (one read each per cycle). A
// rotating crossbar puts the channels back in order on the read side, and a
// row crossbar (rowSel) picks the R rowBuffers that hold the rows of the
// kernel window.
//
// Write side: a producer first claims a group of KP rows (wr_claim, allowed
// while wr_space is high), then writes its activations in the producer's
// loop order: for each group of M'_{i-1} channels, for each of the KP rows,
// for each column x, one word wr_data[0..M'_{i-1}-1] with wr_valid. Claiming
// a whole group before writing lets a producer run a group without stalls.
//
// Read side: rd_grp_ready says that every row needed by the current group of
// K output rows (rows gK-P .. gK+K-1+P of the frame, P = (R-1)/2, clipped to
// the frame) has been written. The reader then issues rd_en with the row
// within the group (rd_k), the input-channel group (rd_cc) and the column
// (rd_x); rd_data[r][i] holds channel rd_cc*C'+i of frame row
// gK+rd_k+r-P, column rd_x, one cycle later. Channels past C read as 0; rows
// outside the frame read garbage and are masked by the PE's rowSel.
// rd_grp_done ends the group and frees the rows no longer needed.
//
// Row numbers are counted across frames, so a producer may already fill the
// next frame while this layer finishes the current one.
//
// The rowBuffer/channelBuffer organisation, the buffer counts and the
// crossbars follow the published design; the exact address mapping, the
// claim/ready handshakes and the 32-bit row counters are this design's
// choices (the source says only that the read sequence is produced by an
// address generator). Stride 1 only.
module act_buffer
  import nn_pkg::*;
#(
  parameter int unsigned H   = 224,
  parameter int unsigned W   = 224,
  parameter int unsigned C   = 64,
  parameter int unsigned R   = 3,
  parameter int unsigned K   = 2,   // row parallelism of the reading layer
  parameter int unsigned CP  = 8,   // C'_i, read lanes
  parameter int unsigned KP  = 2,   // row parallelism of the writing layer
  parameter int unsigned MPP = 2,   // M'_{i-1}, write lanes
  localparam int unsigned P    = (R - 1) / 2,
  localparam int unsigned NR   = KP + R + K - 1 + P,
  localparam int unsigned NCB  = (CP > MPP) ? CP : MPP,
  localparam int unsigned SEG  = (C + NCB - 1) / NCB,
  localparam int unsigned DEPTH = SEG * W,
  localparam int unsigned XW   = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned KW   = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned NCC  = (C + CP - 1) / CP,
  localparam int unsigned CCW  = (NCC > 1) ? $clog2(NCC) : 1
) (
  input  logic clk,
  input  logic rst_n,
  // write side
  output logic wr_space,
  input  logic wr_claim,
  input  logic wr_valid,
  input  act_t wr_data [MPP],
  // read side
  output logic rd_grp_ready,
  input  logic rd_grp_done,
  input  logic rd_en,
  input  logic [KW-1:0]  rd_k,
  input  logic [CCW-1:0] rd_cc,
  input  logic [XW-1:0]  rd_x,
  output act_t rd_data [R][CP]
);
  localparam int unsigned NMW = (C + MPP - 1) / MPP;  // write channel groups
  localparam int unsigned NG  = H / K;                // read groups per frame

  act_t mem [NR][NCB][DEPTH];

  function automatic int unsigned modnr(input int unsigned v);
    int unsigned t;
    t = v;
    for (int i = 0; i < 4; i++) if (t >= NR) t -= NR;
    return t;
  endfunction

  // ---------------- bookkeeping (absolute row numbers) ----------------
  logic [31:0] claimed, written, rd_row_abs, low, need_end;
  int unsigned g;        // read group in frame
  int unsigned rd_slot0; // slot of frame row g*K
  int unsigned gk_clip, rows_after;

  always_comb begin
    gk_clip    = (g * K < P) ? g * K : P;
    rows_after = (K + P < H - g * K) ? K + P : H - g * K;
    low        = rd_row_abs - gk_clip;
    need_end   = rd_row_abs + rows_after;
  end
  assign wr_space     = (claimed + KP) <= (low + NR);
  assign rd_grp_ready = written >= need_end;

  // writer position
  int unsigned mw, kw, xw, wr_slot0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      claimed    <= '0;
      written    <= '0;
      rd_row_abs <= '0;
      g          <= 0;
      rd_slot0   <= 0;
      mw <= 0; kw <= 0; xw <= 0; wr_slot0 <= 0;
    end else begin
      if (wr_claim) claimed <= claimed + KP;
      if (wr_valid) begin
        if (xw != W - 1) xw <= xw + 1;
        else begin
          xw <= 0;
          if (kw != KP - 1) kw <= kw + 1;
          else begin
            kw <= 0;
            if (mw != NMW - 1) mw <= mw + 1;
            else begin
              mw       <= 0;
              written  <= written + KP;
              wr_slot0 <= modnr(wr_slot0 + KP);
            end
          end
        end
      end
      if (rd_grp_done) begin
        g          <= (g == NG - 1) ? 0 : g + 1;
        rd_row_abs <= rd_row_abs + K;
        rd_slot0   <= modnr(rd_slot0 + K);
      end
    end
  end

  // ---------------- write path ----------------
  int unsigned wbase, wq, wr0;
  always_comb begin
    wbase = mw * MPP;
    wq    = wbase / NCB;
    wr0   = wbase % NCB;
  end

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      for (int b = 0; b < NCB; b++) begin
        int unsigned j, seg;
        j   = (b >= wr0) ? b - wr0 : b + NCB - wr0;
        seg = (b < wr0) ? wq + 1 : wq;
        if (j < MPP && wbase + j < C)
          mem[modnr(wr_slot0 + kw)][b][seg * W + xw] <= wr_data[j];
      end
    end
  end

  // ---------------- read path ----------------
  int unsigned rbase, rq, rr0;
  always_comb begin
    rbase = int'(rd_cc) * CP;
    rq    = rbase / NCB;
    rr0   = rbase % NCB;
  end

  act_t raw [R][NCB];
  int unsigned rr0_q, rbase_q;

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int r = 0; r < R; r++) begin
        int unsigned slot;
        slot = modnr(rd_slot0 + int'(rd_k) + r + NR - P);
        for (int b = 0; b < NCB; b++) begin
          int unsigned seg;
          seg = (b < rr0) ? rq + 1 : rq;
          if (seg < SEG) raw[r][b] <= mem[slot][b][seg * W + int'(rd_x)];
          else           raw[r][b] <= '0;
        end
      end
      rr0_q   <= rr0;
      rbase_q <= rbase;
    end
  end

  always_comb begin
    for (int r = 0; r < R; r++)
      for (int i = 0; i < CP; i++) begin
        int unsigned b;
        b = (rr0_q + i >= NCB) ? rr0_q + i - NCB : rr0_q + i;
        rd_data[r][i] = (rbase_q + i < C) ? raw[r][b] : act_t'(0);
      end
  end

  // handshake rules
  a_claim: assert property (@(posedge clk) disable iff (!rst_n) wr_claim |-> wr_space);
  a_read:  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> rd_grp_ready);
endmodule
