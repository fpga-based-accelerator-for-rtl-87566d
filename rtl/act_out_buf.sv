// act_out_buf: output activation buffer, the last stage of the pipeline. It
// packs the last layer's output activations into DDR words, queues them for
// the DDR driver, and counts the output activations for the host.
//
// The last layer writes MPL activations per cycle in its own loop order (for
// each row group, for each output-channel group, for each row, for each
// column). BPW/MPL such words fill one DDR word (lane 0 of the first word in
// bytes 0..MPL-1), which is pushed into a FIFO of FD words. The layer claims
// room for a whole group of its rows before it starts one (us_claim while
// us_space), GROUP_BYTES bytes at a time; room is granted only if the FIFO
// can take the whole group on top of what is already promised, so the layer
// never has to stall mid-group. out_count counts every output activation
// accepted; the host polls it to know how much output is in DDR.
//
// The published design gives the role (pack oact and send it to DDR, a
// counter of output activations checked by the host); FIFO, byte order and
// credit scheme are this design's choices. DDR_W/8 must be a multiple of MPL.
module act_out_buf
  import nn_pkg::*;
#(
  parameter int unsigned MPL = 8,           // lanes of the last layer
  parameter int unsigned GROUP_BYTES = 112 * 128,
  parameter int unsigned FD  = 256,         // FIFO depth in DDR words
  parameter int unsigned DDR_W = 512,
  localparam int unsigned BPW = DDR_W / 8,
  localparam int unsigned LPW = BPW / MPL
) (
  input  logic clk,
  input  logic rst_n,
  output logic us_space,
  input  logic us_claim,
  input  logic in_valid,
  input  act_t in_data [MPL],
  output logic out_valid,
  input  logic out_ready,
  output logic [DDR_W-1:0] out_data,
  output logic [31:0] out_count
);
  localparam int unsigned PW = (FD > 1) ? $clog2(FD) : 1;

  logic [DDR_W-1:0] fifo [FD];
  logic [PW-1:0] wp, rp;
  int unsigned count, pend_bytes, lane;
  logic [DDR_W-1:0] pack;
  logic push, pop;

  assign us_space  = (FD - count) * BPW >= pend_bytes + GROUP_BYTES;
  assign push      = in_valid && (lane == LPW - 1);
  assign out_valid = count != 0;
  assign pop       = out_valid && out_ready;
  assign out_data  = fifo[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= 0; pend_bytes <= 0; lane <= 0;
      pack <= '0; out_count <= '0;
    end else begin
      pend_bytes <= pend_bytes + (us_claim ? GROUP_BYTES : 0) - (in_valid ? MPL : 0);
      if (in_valid) begin
        for (int j = 0; j < MPL; j++) pack[8 * (lane * MPL + j) +: 8] <= in_data[j];
        lane      <= (lane == LPW - 1) ? 0 : lane + 1;
        out_count <= out_count + MPL;
      end
      if (push) wp <= (int'(wp) == FD - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (int'(rp) == FD - 1) ? '0 : rp + 1'b1;
      count <= count + (push ? 1 : 0) - (pop ? 1 : 0);
    end
  end

  always_ff @(posedge clk) begin
    if (push) begin
      logic [DDR_W-1:0] w;
      w = pack;
      for (int j = 0; j < MPL; j++) w[8 * (lane * MPL + j) +: 8] = in_data[j];
      fifo[wp] <= w;
    end
  end

  a_claim: assert property (@(posedge clk) disable iff (!rst_n) us_claim |-> us_space);
  a_room:  assert property (@(posedge clk) disable iff (!rst_n) push |-> count < FD || pop);
endmodule
