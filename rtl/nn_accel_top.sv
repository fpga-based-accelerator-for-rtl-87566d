// nn_accel_top: a layer-pipelined CNN accelerator. Every layer of the
// network has its own engine on chip and all layers work at the same time,
// each on a different band of rows of the frame; activations pass from layer
// to layer through on-chip buffers, and only the input frame, the weights and
// the output leave the chip.
//
// This instance is the front of VGG16 (its four first layers, the pattern
// conv-conv-pool-conv of the accelerator's pipeline diagram):
//
//   DDR -> act_in_buf -> conv0 (3->64, 224x224) -> conv1 (64->64, 224x224)
//       -> pool2 (2x2 max) -> conv3 (64->128, 112x112) -> act_out_buf -> DDR
//
// with a ddr_driver feeding the input stream and one weight stream per
// convolution layer and draining the output stream. The parallelism of
// each engine (C' input channels x M' output channels x 3 x 3 multipliers, K
// rows per weight load) is chosen so that all layers need the same time per
// input row, T_row = 7168 cycles (conv3 works on half as many rows, each
// twice as long): conv0 C'=3 M'=2 K=2, conv1 C'=8 M'=16 K=2, conv3 C'=8 M'=8
// K=1, 1782 multipliers in all, i.e. 891 DSP48 slices at two 8-bit products
// per slice. One frame takes about 224 x 7168 = 1.6 M cycles in steady state.
//
// Interfaces. start and the region registers (read regions for the input
// frames, rd_base[0]/rd_words[0], and for the weights of conv0, conv1, conv3 in
// clients 1..3; the output region wr_base/wr_words) come from the host; the
// mem_* ports go to the DDR interface (valid/ready requests, bursts of up to
// 16 words, read data returned in order). out_count counts output
// activations written. The stall counters count idle cycles of each
// convolution engine.
//
// Weights in DDR are stored per layer in the order the engine uses them:
// for each output-channel group, for each input-channel group, one set of
// M'*C'*R*S bytes padded to whole 64-byte words (see weight_buffer). Input
// frames are bytes in row, column, channel order; output bytes come out in
// the order of conv3 (row, output-channel group of 8, column, channel).
//
// The layer-per-engine pipeline, the balancing of T_row across layers and
// the per-row-group weight reloading follow the published architecture; the
// choice of layers, each engine's C'/M'/K, the stream interfaces and the
// memory layout are this design's own (the published builds hold whole
// networks and do not list their per-layer parameters).
module nn_accel_top
  import nn_pkg::*;
#(
  parameter int unsigned DDR_W  = 512,
  parameter int unsigned ADDR_W = 32,
  // input frame
  parameter int unsigned H0 = 224,
  parameter int unsigned W0 = 224,
  parameter int unsigned C0 = 3,
  // conv0
  parameter int unsigned M0  = 64,
  parameter int unsigned CP0 = 3,
  parameter int unsigned MP0 = 2,
  parameter int unsigned K0  = 2,
  // conv1
  parameter int unsigned M1  = 64,
  parameter int unsigned CP1 = 8,
  parameter int unsigned MP1 = 16,
  parameter int unsigned K1  = 2,
  // conv3 (after pool2)
  parameter int unsigned M3  = 128,
  parameter int unsigned CP3 = 8,
  parameter int unsigned MP3 = 8,
  parameter int unsigned K3  = 1,
  parameter int unsigned OUT_FD = 256,
  parameter string BIAS0_FILE = "", parameter string LS0_FILE = "", parameter string RS0_FILE = "",
  parameter string BIAS1_FILE = "", parameter string LS1_FILE = "", parameter string RS1_FILE = "",
  parameter string BIAS3_FILE = "", parameter string LS3_FILE = "", parameter string RS3_FILE = "",
  localparam int unsigned NRD = 4,
  localparam int unsigned LW  = $clog2(16 + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic [ADDR_W-1:0] rd_base  [NRD],
  input  logic [ADDR_W-1:0] rd_words [NRD],
  input  logic [ADDR_W-1:0] wr_base,
  input  logic [ADDR_W-1:0] wr_words,
  output logic              mem_rd_valid,
  input  logic              mem_rd_ready,
  output logic [ADDR_W-1:0] mem_rd_addr,
  output logic [LW-1:0]     mem_rd_len,
  input  logic              mem_rdata_valid,
  input  logic [DDR_W-1:0]  mem_rdata,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output logic [DDR_W-1:0]  mem_wr_data,
  output logic [31:0] out_count,
  output logic [31:0] in_pixels,
  output logic [31:0] stall0, stall1, stall3,
  output logic [31:0] drain0, drain1, drain3,
  output logic busy0, busy1, busy3
);
  localparam int unsigned H3 = H0 / 2;
  localparam int unsigned W3 = W0 / 2;

  logic [NRD-1:0] cl_valid, cl_ready;
  logic [DDR_W-1:0] cl_data [NRD];
  logic ow_valid, ow_ready;
  logic [DDR_W-1:0] ow_data;

  ddr_driver #(.NRD(NRD), .DDR_W(DDR_W), .ADDR_W(ADDR_W), .BL(16), .FDEP(64), .MAXOUT(4)) u_ddr (
    .clk, .rst_n, .start, .rd_base, .rd_words, .wr_base, .wr_words,
    .cl_valid, .cl_ready, .cl_data,
    .wr_valid(ow_valid), .wr_ready(ow_ready), .wr_data(ow_data),
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rd_len,
    .mem_rdata_valid, .mem_rdata,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data
  );

  // ---------------- input ----------------
  logic a0_space, a0_claim, a0_valid;
  act_t a0_data [C0];

  act_in_buf #(.W(W0), .C0(C0), .KP(K0), .DDR_W(DDR_W)) u_in (
    .clk, .rst_n,
    .in_valid(cl_valid[0]), .in_ready(cl_ready[0]), .in_data(cl_data[0]),
    .ds_space(a0_space), .ds_claim(a0_claim),
    .out_valid(a0_valid), .out_data(a0_data), .pixel_count(in_pixels)
  );

  // ---------------- conv0 ----------------
  logic a1_space, a1_claim, a1_valid;
  act_t a1_data [MP0];

  conv_engine #(.H(H0), .W(W0), .C(C0), .M(M0), .R(3), .S(3), .CP(CP0), .MP(MP0),
                .K(K0), .KP(K0), .MPP(C0), .DDR_W(DDR_W),
                .BIAS_FILE(BIAS0_FILE), .LS_FILE(LS0_FILE), .RS_FILE(RS0_FILE)) u_conv0 (
    .clk, .rst_n,
    .wr_space(a0_space), .wr_claim(a0_claim), .wr_valid(a0_valid), .wr_data(a0_data),
    .w_valid(cl_valid[1]), .w_ready(cl_ready[1]), .w_data(cl_data[1]),
    .ds_space(a1_space), .ds_claim(a1_claim), .out_valid(a1_valid), .out_data(a1_data),
    .busy(busy0), .stall_cycles(stall0), .drain_beats(drain0)
  );

  // ---------------- conv1 ----------------
  logic a2_space, a2_claim, a2_valid;
  act_t a2_data [MP1];

  conv_engine #(.H(H0), .W(W0), .C(M0), .M(M1), .R(3), .S(3), .CP(CP1), .MP(MP1),
                .K(K1), .KP(K0), .MPP(MP0), .DDR_W(DDR_W),
                .BIAS_FILE(BIAS1_FILE), .LS_FILE(LS1_FILE), .RS_FILE(RS1_FILE)) u_conv1 (
    .clk, .rst_n,
    .wr_space(a1_space), .wr_claim(a1_claim), .wr_valid(a1_valid), .wr_data(a1_data),
    .w_valid(cl_valid[2]), .w_ready(cl_ready[2]), .w_data(cl_data[2]),
    .ds_space(a2_space), .ds_claim(a2_claim), .out_valid(a2_valid), .out_data(a2_data),
    .busy(busy1), .stall_cycles(stall1), .drain_beats(drain1)
  );

  // ---------------- pool2 ----------------
  logic a3_space, a3_claim, a3_valid;
  act_t a3_data [MP1];

  pool_engine #(.W(W0), .MP(MP1), .KP(K1)) u_pool2 (
    .clk, .rst_n,
    .us_space(a2_space), .us_claim(a2_claim), .in_valid(a2_valid), .in_data(a2_data),
    .ds_space(a3_space), .ds_claim(a3_claim), .out_valid(a3_valid), .out_data(a3_data)
  );

  // ---------------- conv3 ----------------
  logic a4_space, a4_claim, a4_valid;
  act_t a4_data [MP3];

  conv_engine #(.H(H3), .W(W3), .C(M1), .M(M3), .R(3), .S(3), .CP(CP3), .MP(MP3),
                .K(K3), .KP(K1 / 2), .MPP(MP1), .DDR_W(DDR_W),
                .BIAS_FILE(BIAS3_FILE), .LS_FILE(LS3_FILE), .RS_FILE(RS3_FILE)) u_conv3 (
    .clk, .rst_n,
    .wr_space(a3_space), .wr_claim(a3_claim), .wr_valid(a3_valid), .wr_data(a3_data),
    .w_valid(cl_valid[3]), .w_ready(cl_ready[3]), .w_data(cl_data[3]),
    .ds_space(a4_space), .ds_claim(a4_claim), .out_valid(a4_valid), .out_data(a4_data),
    .busy(busy3), .stall_cycles(stall3), .drain_beats(drain3)
  );

  // ---------------- output ----------------
  act_out_buf #(.MPL(MP3), .GROUP_BYTES(K3 * W3 * M3), .FD(OUT_FD), .DDR_W(DDR_W)) u_out (
    .clk, .rst_n,
    .us_space(a4_space), .us_claim(a4_claim), .in_valid(a4_valid), .in_data(a4_data),
    .out_valid(ow_valid), .out_ready(ow_ready), .out_data(ow_data),
    .out_count
  );
endmodule
