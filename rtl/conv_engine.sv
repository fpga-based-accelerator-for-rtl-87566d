// conv_engine: one convolution layer engine, a stage of the layer pipeline.
// It computes a stride-1, zero-padded ("same") R x S convolution of an
// H x W x C frame into H x W x M, followed by bias, ReLU and requantisation
// to 8 bits, with M'*C'*R*S multipliers working every cycle.
//
// Blocks: the flexible activation buffer (act_buffer) on the input, which the
// previous stage writes M'_{i-1} channels at a time; the weight buffer
// (weight_buffer), fed with DDR words; the controller (conv_ctrl); the PE
// array (pe_array, M' PEs); and three ROMs with the biases (one per output
// channel), the left shifts (one per input channel) and the right shifts
// (one per output channel).
//
// Interfaces. Input side: wr_space / wr_claim / wr_valid / wr_data, see
// act_buffer. Weights: w_valid / w_ready / w_data, one DDR word per
// transfer. Output side: the engine claims room for K output rows in the
// next stage (ds_claim while ds_space) before each group, then emits, for
// each output-channel group mm, for each of the K rows, for each column, one
// word out_data[0..M'-1] (channels mm*M' .. mm*M'+M'-1) with out_valid. This
// is exactly the write order the next stage's activation buffer expects.
//
// Rate: a group of K rows takes K*W*ceil(C/C')*ceil(M/M') cycles, the
// published T_row, when weights arrive in time. Output words appear during
// the last input-channel pass of each mm, 4 + (S-1)/2 cycles after the beat
// that read the last column they need.
//
// The ROM contents are given as hex files (BIAS_FILE, LS_FILE, RS_FILE);
// without a file the biases and left shifts are 0 and every right shift is
// RS_DEFAULT (8, the value in the published shifter example).
module conv_engine
  import nn_pkg::*;
#(
  parameter int unsigned H   = 224,
  parameter int unsigned W   = 224,
  parameter int unsigned C   = 64,
  parameter int unsigned M   = 64,
  parameter int unsigned R   = 3,
  parameter int unsigned S   = 3,
  parameter int unsigned CP  = 8,
  parameter int unsigned MP  = 16,
  parameter int unsigned K   = 2,
  parameter int unsigned KP  = 2,   // row parallelism of the producer
  parameter int unsigned MPP = 2,   // M' of the producer (write lanes)
  parameter int unsigned DDR_W = 512,
  parameter string BIAS_FILE = "",
  parameter string LS_FILE   = "",
  parameter string RS_FILE   = "",
  parameter int unsigned RS_DEFAULT = 8,
  localparam int unsigned NCC = (C + CP - 1) / CP,
  localparam int unsigned NMM = (M + MP - 1) / MP,
  localparam int unsigned XW  = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned KW  = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned CCW = (NCC > 1) ? $clog2(NCC) : 1,
  localparam int unsigned MMW = (NMM > 1) ? $clog2(NMM) : 1,
  localparam int unsigned AW  = (K * W > 1) ? $clog2(K * W) : 1,
  localparam int unsigned BAW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned LAW = (C > 1) ? $clog2(C) : 1
) (
  input  logic clk,
  input  logic rst_n,
  // from the previous stage
  output logic wr_space,
  input  logic wr_claim,
  input  logic wr_valid,
  input  act_t wr_data [MPP],
  // weights from DDR
  input  logic w_valid,
  output logic w_ready,
  input  logic [DDR_W-1:0] w_data,
  // to the next stage
  input  logic ds_space,
  output logic ds_claim,
  output logic out_valid,
  output act_t out_data [MP],
  // status
  output logic busy,
  output logic [31:0] stall_cycles,
  output logic [31:0] drain_beats
);
  logic grp_ready, grp_done, rd_en;
  logic [KW-1:0] rd_k;
  logic [CCW-1:0] rd_cc, ls_cc;
  logic [XW-1:0] rd_x;
  act_t act [R][CP];
  logic [1:0] wfull;
  logic wsel, wrel, wrel_bank;
  wgt_t wgt [MP][CP][R][S];
  logic pe_valid, o_valid, o_first, o_last;
  logic [S-1:0] flush, zmac;
  logic [AW-1:0] o_addr;
  logic [R-1:0] o_rowsel;
  logic [MMW-1:0] o_mm;

  act_buffer #(.H(H), .W(W), .C(C), .R(R), .K(K), .CP(CP), .KP(KP), .MPP(MPP)) u_abuf (
    .clk, .rst_n,
    .wr_space, .wr_claim, .wr_valid, .wr_data,
    .rd_grp_ready(grp_ready), .rd_grp_done(grp_done),
    .rd_en, .rd_k, .rd_cc, .rd_x, .rd_data(act)
  );

  weight_buffer #(.MP(MP), .CP(CP), .R(R), .S(S), .DDR_W(DDR_W)) u_wbuf (
    .clk, .rst_n,
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
    .full(wfull), .rd_sel(wsel), .rel(wrel), .rel_bank(wrel_bank), .wgt
  );

  conv_ctrl #(.H(H), .W(W), .C(C), .M(M), .R(R), .S(S), .CP(CP), .MP(MP), .K(K)) u_ctrl (
    .clk, .rst_n,
    .grp_ready, .grp_done, .rd_en, .rd_k, .rd_cc, .rd_x,
    .wfull, .wsel, .wrel, .wrel_bank,
    .ds_space, .ds_claim,
    .pe_valid, .flush, .zmac, .ls_cc,
    .o_valid, .o_addr, .o_first, .o_last, .o_rowsel, .o_mm,
    .busy, .stall_cycles, .drain_beats
  );

  // bias and shift ROMs
  logic [PSUM_W-1:0]  bias_raw [MP];
  logic [SHIFT_W-1:0] rs_raw [MP];
  logic [SHIFT_W-1:0] ls_raw [CP];
  psum_t  bias [MP];
  shamt_t rs [MP];
  shamt_t ls [CP];

  param_rom #(.DEPTH(M), .WIDTH(PSUM_W), .NRD(MP), .INIT_FILE(BIAS_FILE),
              .DEFAULT_VAL('0)) u_bias_rom (
    .rd_base(BAW'(int'(o_mm) * MP)), .rd_data(bias_raw));
  param_rom #(.DEPTH(M), .WIDTH(SHIFT_W), .NRD(MP), .INIT_FILE(RS_FILE),
              .DEFAULT_VAL(SHIFT_W'(RS_DEFAULT))) u_rs_rom (
    .rd_base(BAW'(int'(o_mm) * MP)), .rd_data(rs_raw));
  param_rom #(.DEPTH(C), .WIDTH(SHIFT_W), .NRD(CP), .INIT_FILE(LS_FILE),
              .DEFAULT_VAL('0)) u_ls_rom (
    .rd_base(LAW'(int'(ls_cc) * CP)), .rd_data(ls_raw));

  always_comb begin
    for (int j = 0; j < MP; j++) begin
      bias[j] = psum_t'(bias_raw[j]);
      rs[j]   = rs_raw[j];
    end
    for (int i = 0; i < CP; i++) ls[i] = ls_raw[i];
  end

  pe_array #(.MP(MP), .CP(CP), .R(R), .S(S), .SPAD_DEPTH(K * W)) u_pes (
    .clk, .rst_n,
    .in_valid(pe_valid), .flush, .zmac, .act, .wgt, .ls,
    .o_valid, .o_addr, .o_first, .o_last, .o_rowsel, .bias, .rs,
    .oact_valid(out_valid), .oact(out_data)
  );
endmodule
