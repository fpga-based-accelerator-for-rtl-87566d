// weight_buffer: holds the M' x C' x R x S weights that the PE array keeps
// stationary during one pass (one output-channel group mm and one
// input-channel group cc over K rows), and loads the next pass's weights from
// DDR while the current pass runs.
//
// How it works. Two banks of NW = M'*C'*R*S weights are used in turn. Words
// of DDR_W bits arrive on a valid/ready stream; each word is unpacked into
// DDR_W/8 weights (byte 0 first) written at consecutive indices of the bank
// being loaded. A set occupies ceil(NW / (DDR_W/8)) words; bytes after the
// last weight of a set are padding and are dropped, so every set starts on a
// word boundary. When a set is complete its bank is marked full and loading
// moves to the other bank; in_ready is low while that bank is still full.
// The controller reads bank rd_sel (full[] tells it whether its next bank is
// ready) and frees a bank with rel/rel_bank after the pass's last beat.
//
// Weight index order within a set: ((m*C' + c)*R + r)*S + s, i.e. kernel
// column fastest. The host stores the weights of a layer in DDR in pass order
// (for each mm, for each cc) and the DDR driver streams the layer's region
// again for every group of K rows, which is why weights dominate DDR traffic.
//
// Latency: a weight set is usable the cycle after its last word is accepted.
// The published design names the buffer and its role (keep the weights, unpack
// them from binary); the double banking, byte order and padding are this
// design's choices.
module weight_buffer
  import nn_pkg::*;
#(
  parameter int unsigned MP = 4,
  parameter int unsigned CP = 2,
  parameter int unsigned R  = 3,
  parameter int unsigned S  = 3,
  parameter int unsigned DDR_W = 512,
  localparam int unsigned NW  = MP * CP * R * S,
  localparam int unsigned BPW = DDR_W / 8
) (
  input  logic clk,
  input  logic rst_n,
  // DDR word stream
  input  logic in_valid,
  output logic in_ready,
  input  logic [DDR_W-1:0] in_data,
  // controller side
  output logic [1:0] full,
  input  logic rd_sel,
  input  logic rel,
  input  logic rel_bank,
  output wgt_t wgt [MP][CP][R][S]
);
  wgt_t bank [2][NW];
  logic ld_bank;
  int unsigned widx;

  assign in_ready = !full[ld_bank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full    <= '0;
      ld_bank <= 1'b0;
      widx    <= 0;
    end else begin
      if (rel) full[rel_bank] <= 1'b0;
      if (in_valid && in_ready) begin
        if (widx + BPW >= NW) begin
          widx          <= 0;
          full[ld_bank] <= 1'b1;
          ld_bank       <= !ld_bank;
        end else begin
          widx <= widx + BPW;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      for (int j = 0; j < BPW; j++)
        if (widx + j < NW) bank[ld_bank][widx + j] <= wgt_t'(in_data[8*j +: 8]);
  end

  always_comb
    for (int m = 0; m < MP; m++)
      for (int c = 0; c < CP; c++)
        for (int r = 0; r < R; r++)
          for (int s = 0; s < S; s++)
            wgt[m][c][r][s] = bank[rd_sel][((m * CP + c) * R + r) * S + s];

  a_rel: assert property (@(posedge clk) disable iff (!rst_n) rel |-> full[rel_bank]);
endmodule
