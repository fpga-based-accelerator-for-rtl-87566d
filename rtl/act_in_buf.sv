// act_in_buf: input activation buffer, the first stage of the pipeline. It
// takes the input frames as raw DDR words and unpacks them into pixels for
// the first layer's activation buffer.
//
// Input frames are stored in DDR as a plain byte stream: row by row, column
// by column, with the C0 channels of a pixel in consecutive bytes, frames one
// after another. Words of DDR_W bits (byte 0 in bits 7:0) enter a byte queue
// of two words; whenever the queue holds a full pixel and the current row
// group has been claimed in the first layer, one pixel (C0 bytes) is written
// per cycle. Before every group of KP rows the buffer claims room in the
// first layer (ds_claim while ds_space). A pixel can span two DDR words.
//
// Throughput: one pixel per cycle while words keep coming, with one cycle
// between groups for the claim (the first layer spends far longer than that
// on a group, so the gap never limits the pipeline). The published
// design gives the role (buffer iact against DDR latency, unpack binary to
// pixels); the byte layout and the queue are this design's choices.
module act_in_buf
  import nn_pkg::*;
#(
  parameter int unsigned W  = 224,
  parameter int unsigned C0 = 3,
  parameter int unsigned KP = 1,
  parameter int unsigned DDR_W = 512,
  localparam int unsigned BPW = DDR_W / 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  logic [DDR_W-1:0] in_data,
  input  logic ds_space,
  output logic ds_claim,
  output logic out_valid,
  output act_t out_data [C0],
  output logic [31:0] pixel_count
);
  logic [2*DDR_W-1:0] q;
  int unsigned count, grp_left;
  logic emit, accept;
  int unsigned after_emit;

  assign ds_claim   = (grp_left == 0) && ds_space;
  assign emit       = (grp_left != 0) && (count >= C0);
  assign after_emit = emit ? count - C0 : count;
  assign in_ready   = after_emit + BPW <= 2 * BPW;
  assign accept     = in_valid && in_ready;

  logic [2*DDR_W-1:0] nq;
  always_comb begin
    nq = q;
    if (emit) nq = nq >> (8 * C0);
    if (accept) nq[8 * after_emit +: DDR_W] = in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q           <= '0;
      count       <= 0;
      grp_left    <= 0;
      out_valid   <= 1'b0;
      pixel_count <= '0;
    end else begin
      q     <= nq;
      count <= after_emit + (accept ? BPW : 0);
      if (ds_claim) grp_left <= KP * W;
      else if (emit) grp_left <= grp_left - 1;
      out_valid <= emit;
      if (emit) pixel_count <= pixel_count + 1;
    end
  end

  always_ff @(posedge clk)
    if (emit)
      for (int c = 0; c < C0; c++) out_data[c] <= act_t'(q[8 * c +: 8]);
endmodule
