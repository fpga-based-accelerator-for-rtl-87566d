// pe: one processing element of a convolution layer engine. It computes one
// output channel and holds C' x R x S multipliers.
//
// How it works. Each cycle in which in_valid is high ("beat") the PE takes
// one column of input activations: C' input channels of each of the R kernel
// rows (act[r][c]). The weights stay in place for a whole pass (weight
// stationary). For every kernel row r and kernel column s the C' products
// w[c][r][s]*act[r][c] are first aligned by the channel's left shift ls[c]
// (channel-wise fixed-point formats) and summed over c. The S sums of a row
// then travel along a chain of registers, one per kernel column:
//   chain[r][0] <= P[r][0]
//   chain[r][s] <= chain[r][s-1] + P[r][s]
// so that chain[r][S-1] holds the 1-D correlation of the row with the kernel
// row, delayed by S-1 beats. The controller's masks handle zero padding at
// the left and right edges: flush[s] replaces the incoming chain value by 0
// (left edge of a new row) and zmac[s] replaces a product by 0 (columns past
// the right edge).
//
// One cycle after a beat the chain ends are combined: rowSel masks the kernel
// rows that fall outside the frame (top/bottom padding), an adder tree adds
// the R row sums, and the result is accumulated into psumSpad, a scratchpad
// of K*W 32-bit sums addressed by o_addr. On the first input-channel group
// (o_first) the sum starts from the channel's bias instead of the
// scratchpad (the zeroAdd mux). On the last group (o_last) the total goes
// through ReLU and the right shifter rs, is saturated to 8 bits and is
// presented on oact one cycle later with oact_valid.
//
// Timing: chain update at the beat edge; psumSpad update and oact register at
// the next edge, so oact_valid follows o_valid by one cycle.
//
// The structure (multipliers, left shifters, per-row pipelined accumulation,
// flush/zeroMac/rowSel, adder tree, psumSpad, bias mux, right shifter) is the
// published one. The order ReLU-then-shift follows the published shifter
// figure; saturation on the right shift is this design's choice (the source
// says only "shifted and truncated"). psumSpad is written as an array with a
// combinational read; it is this design's choice.
module pe
  import nn_pkg::*;
#(
  parameter int unsigned CP = 2,     // C': input channels per beat
  parameter int unsigned R  = 3,     // kernel rows
  parameter int unsigned S  = 3,     // kernel columns
  parameter int unsigned SPAD_DEPTH = 2 * 224  // K * W
) (
  input  logic   clk,
  input  logic   rst_n,
  // beat side
  input  logic   in_valid,
  input  logic [S-1:0] flush,
  input  logic [S-1:0] zmac,
  input  act_t   act [R][CP],
  input  wgt_t   wgt [CP][R][S],
  input  shamt_t ls  [CP],
  // output side, one cycle after the beat that completed the output
  input  logic   o_valid,
  input  logic [$clog2(SPAD_DEPTH)-1:0] o_addr,
  input  logic   o_first,
  input  logic   o_last,
  input  logic [R-1:0] o_rowsel,
  input  psum_t  bias,
  input  shamt_t rs,
  output logic   oact_valid,
  output act_t   oact
);
  psum_t chain [R][S];
  psum_t prod_sum [R][S];
  psum_t spad [SPAD_DEPTH];

  // multipliers, left shifters and the sum over input channels
  always_comb begin
    for (int r = 0; r < R; r++) begin
      for (int s = 0; s < S; s++) begin
        prod_sum[r][s] = '0;
        for (int c = 0; c < CP; c++) begin
          prod_sum[r][s] += psum_t'(prod_t'(act[r][c]) * prod_t'(wgt[c][r][s])) <<< ls[c];
        end
      end
    end
  end

  // per-kernel-row accumulation chain
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int r = 0; r < R; r++) begin
        for (int s = 0; s < S; s++) begin
          psum_t up;
          up = (s == 0 || flush[s]) ? psum_t'(0) : chain[r][(s == 0) ? 0 : s-1];
          chain[r][s] <= up + (zmac[s] ? psum_t'(0) : prod_sum[r][s]);
        end
      end
    end
  end

  // rowSel and adder tree over kernel rows
  psum_t row_total;
  always_comb begin
    row_total = '0;
    for (int r = 0; r < R; r++)
      if (o_rowsel[r]) row_total += chain[r][S-1];
  end

  // psumSpad accumulation with the zeroAdd / bias mux
  psum_t acc;
  assign acc = (o_first ? bias : spad[o_addr]) + row_total;

  always_ff @(posedge clk) begin
    if (o_valid) spad[o_addr] <= acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oact_valid <= 1'b0;
      oact       <= '0;
    end else begin
      oact_valid <= o_valid && o_last;
      if (o_valid && o_last) oact <= requant(acc, rs);
    end
  end
endmodule
