// pe_array: the processing element array of a convolution layer engine,
// M' PEs side by side, M' x C' x R x S multipliers in all.
//
// The C' x R activations of a beat are broadcast to every PE; PE j holds the
// weights of output channel mm*M'+j and receives that channel's bias and
// right-shift amount. All PEs share the controller's masks and scratchpad
// address, so they run in lock step, and their M' results are merged into one
// output word of M' activations (oact[j] from PE j) with a single valid.
// Latency is that of a PE: oact_valid one cycle after o_valid.
//
// Broadcast and merge are as published; everything else is in pe.
module pe_array
  import nn_pkg::*;
#(
  parameter int unsigned MP = 4,     // M': output channels (PEs)
  parameter int unsigned CP = 2,     // C': input channels per beat
  parameter int unsigned R  = 3,
  parameter int unsigned S  = 3,
  parameter int unsigned SPAD_DEPTH = 2 * 224
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic [S-1:0] flush,
  input  logic [S-1:0] zmac,
  input  act_t   act [R][CP],
  input  wgt_t   wgt [MP][CP][R][S],
  input  shamt_t ls  [CP],
  input  logic   o_valid,
  input  logic [$clog2(SPAD_DEPTH)-1:0] o_addr,
  input  logic   o_first,
  input  logic   o_last,
  input  logic [R-1:0] o_rowsel,
  input  psum_t  bias [MP],
  input  shamt_t rs   [MP],
  output logic   oact_valid,
  output act_t   oact [MP]
);
  logic [MP-1:0] v;

  for (genvar j = 0; j < MP; j++) begin : g_pe
    pe #(.CP(CP), .R(R), .S(S), .SPAD_DEPTH(SPAD_DEPTH)) u_pe (
      .clk, .rst_n, .in_valid, .flush, .zmac, .act,
      .wgt(wgt[j]), .ls,
      .o_valid, .o_addr, .o_first, .o_last, .o_rowsel,
      .bias(bias[j]), .rs(rs[j]),
      .oact_valid(v[j]), .oact(oact[j])
    );
  end

  assign oact_valid = v[0];
endmodule
