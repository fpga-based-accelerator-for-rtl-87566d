// pool_engine: 2 x 2 max pooling with stride 2, one pipeline stage between
// two convolution layer engines.
//
// It sits on the write path into the next layer's activation buffer and
// works on the producer's stream as it comes: for each group of KP input
// rows (KP even), for each channel group of MP channels, for each row, for
// each column, one word of MP activations. On even rows it takes the maximum
// of each horizontal pair of columns and keeps it in a line buffer of W/2
// words; on odd rows it takes the maximum of the pair and of the stored
// value and emits it. The output stream therefore has the same shape with
// KP/2 rows of W/2 columns per group, which is the write order the next
// activation buffer expects, and only W/2 x MP activations are stored.
//
// Flow control: a claim for a group of KP input rows is passed on as a claim
// for KP/2 output rows (us_space = ds_space, ds_claim = us_claim). Outputs
// are registered: out_valid follows the in_valid of the last contributing
// activation by one cycle.
//
// The published design names pooling layers as pipeline stages of their own
// and shows their stride halving the row rate of later layers; the operator
// (max), the 2 x 2 window and the line-buffer scheme are this design's
// choices, made to match the VGG-style networks evaluated.
module pool_engine
  import nn_pkg::*;
#(
  parameter int unsigned W  = 224,  // input width
  parameter int unsigned MP = 16,   // lanes (M' of the producer)
  parameter int unsigned KP = 2     // rows per producer group, even
) (
  input  logic clk,
  input  logic rst_n,
  output logic us_space,
  input  logic us_claim,
  input  logic in_valid,
  input  act_t in_data [MP],
  input  logic ds_space,
  output logic ds_claim,
  output logic out_valid,
  output act_t out_data [MP]
);
  act_t lb [W/2][MP];
  act_t hold [MP];
  int unsigned k, x;

  assign us_space = ds_space;
  assign ds_claim = us_claim;

  function automatic act_t amax(input act_t a, input act_t b);
    return (a > b) ? a : b;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= 0;
      x <= 0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && k[0] && x[0];
      if (in_valid) begin
        if (x != W - 1) x <= x + 1;
        else begin
          x <= 0;
          k <= (k == KP - 1) ? 0 : k + 1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int j = 0; j < MP; j++) begin
        if (!x[0]) hold[j] <= in_data[j];
        else if (!k[0]) lb[x/2][j] <= amax(hold[j], in_data[j]);
        else out_data[j] <= amax(lb[x/2][j], amax(hold[j], in_data[j]));
      end
    end
  end
endmodule
