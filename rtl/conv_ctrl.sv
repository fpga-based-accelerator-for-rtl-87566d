// conv_ctrl: controller of a convolution layer engine. It walks the loop
// nest of the accelerator's dataflow,
//
//   for g  in H/K          (group of K output rows)
//    for mm in M/M'        (output-channel group)  -- one "pass" per (mm,cc)
//     for cc in C/C'       (input-channel group)
//      for k in K          (row within the group)
//       for x in W         (column)   -> one beat: M'xC'xRxS MACs
//
// and produces the activation-buffer reads, the PE control (flush, zeroMac,
// rowSel, psumSpad address, first/last channel group) and the handshakes with
// the weight buffer, the activation buffer and the next layer.
//
// Timing. A beat is issued in cycle t0 (rd_en to the activation buffer,
// whose data arrive in t1). In t1 the PE array takes the beat (pe_valid with
// the flush/zmac masks, the weight bank wsel and the input-channel group
// ls_base). Because a kernel row is accumulated along a chain of S registers,
// the result for column x leaves the chain P = (S-1)/2 beats after the beat
// of column x; the controller keeps the tags of the last P beats and presents
// the matching one in t2 (o_valid, o_addr = k*W + x, o_first, o_last,
// o_rowsel, o_mm). Passes follow each other without a gap as long as the
// next weights are there; a group starts only when the activation buffer has
// all its rows (grp_ready) and the next layer has room for K rows
// (ds_space, claimed with ds_claim), so no stall is ever needed inside a
// pass. If the next pass cannot start at once, P "drain" beats (no read, all
// outputs of the chain completed, none started) push the last results out.
//
// Padding masks for a beat at column x (P = (S-1)/2): flush[s] = (x == 0)
// for 1 <= s <= P, zmac[s] = (x < s - P). rowSel[r] is set when frame row
// g*K + k + r - (R-1)/2 lies inside the frame.
//
// The loop order, the K-row weight reuse, the pass time of K*W cycles and
// the names flush / zeroMac / rowSel follow the published design; the exact
// pipeline timing, the drain beats and the handshakes are this design's.
module conv_ctrl #(
  parameter int unsigned H  = 224,
  parameter int unsigned W  = 224,
  parameter int unsigned C  = 64,
  parameter int unsigned M  = 64,
  parameter int unsigned R  = 3,
  parameter int unsigned S  = 3,
  parameter int unsigned CP = 8,
  parameter int unsigned MP = 16,
  parameter int unsigned K  = 2,
  localparam int unsigned PC  = (S - 1) / 2,
  localparam int unsigned PR  = (R - 1) / 2,
  localparam int unsigned NCC = (C + CP - 1) / CP,
  localparam int unsigned NMM = (M + MP - 1) / MP,
  localparam int unsigned NG  = H / K,
  localparam int unsigned XW  = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned KW  = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned CCW = (NCC > 1) ? $clog2(NCC) : 1,
  localparam int unsigned MMW = (NMM > 1) ? $clog2(NMM) : 1,
  localparam int unsigned AW  = (K * W > 1) ? $clog2(K * W) : 1
) (
  input  logic clk,
  input  logic rst_n,
  // activation buffer
  input  logic grp_ready,
  output logic grp_done,
  output logic rd_en,
  output logic [KW-1:0]  rd_k,
  output logic [CCW-1:0] rd_cc,
  output logic [XW-1:0]  rd_x,
  // weight buffer
  input  logic [1:0] wfull,
  output logic wsel,
  output logic wrel,
  output logic wrel_bank,
  // next layer
  input  logic ds_space,
  output logic ds_claim,
  // PE array, beat side (t1)
  output logic pe_valid,
  output logic [S-1:0] flush,
  output logic [S-1:0] zmac,
  output logic [CCW-1:0] ls_cc,
  // PE array, output side (t2)
  output logic o_valid,
  output logic [AW-1:0] o_addr,
  output logic o_first,
  output logic o_last,
  output logic [R-1:0] o_rowsel,
  output logic [MMW-1:0] o_mm,
  // status
  output logic busy,
  output logic [31:0] stall_cycles,
  output logic [31:0] drain_beats
);
  typedef struct packed {
    logic           real_b;
    logic [KW-1:0]  k;
    logic [XW-1:0]  x;
    logic [MMW-1:0] mm;
    logic           first;
    logic           last;
    logic [R-1:0]   rowsel;
  } tag_t;

  // loop counters: position of the next beat
  int unsigned g, mm, cc, k, x;
  logic active, bank;
  int unsigned dcnt;

  logic first_pass, can_start, issue, drain, last_beat, last_pass;
  assign first_pass = (mm == 0) && (cc == 0);
  assign can_start  = wfull[bank] && (!first_pass || (grp_ready && ds_space));
  assign issue      = active || ((dcnt == 0 || dcnt == PC) && can_start);
  assign drain      = !issue && (dcnt != 0);
  assign last_beat  = (k == K - 1) && (x == W - 1);
  assign last_pass  = (mm == NMM - 1) && (cc == NCC - 1);

  assign rd_en    = issue;
  assign rd_k     = KW'(k);
  assign rd_cc    = CCW'(cc);
  assign rd_x     = XW'(x);
  assign ds_claim = issue && !active && first_pass;
  assign grp_done = issue && last_beat && last_pass;
  assign busy     = active;

  // beat column of this cycle (drain beats act as columns 0..P-1)
  int unsigned bx;
  assign bx = drain ? (PC - dcnt) : x;

  logic [R-1:0] rowsel0;
  always_comb
    for (int r = 0; r < R; r++) begin
      int rowi;
      rowi = int'(g * K + k + r) - int'(PR);
      rowsel0[r] = (rowi >= 0) && (rowi < int'(H));
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g <= 0; mm <= 0; cc <= 0; k <= 0; x <= 0;
      active <= 1'b0; bank <= 1'b0; dcnt <= 0;
      stall_cycles <= '0; drain_beats <= '0;
    end else begin
      if (issue) begin
        active <= 1'b1;
        dcnt   <= 0;
        if (x != W - 1) x <= x + 1;
        else begin
          x <= 0;
          if (k != K - 1) k <= k + 1;
          else begin
            k      <= 0;
            active <= 1'b0;
            dcnt   <= PC;
            bank   <= !bank;
            if (cc != NCC - 1) cc <= cc + 1;
            else begin
              cc <= 0;
              if (mm != NMM - 1) mm <= mm + 1;
              else begin
                mm <= 0;
                g  <= (g == NG - 1) ? 0 : g + 1;
              end
            end
          end
        end
      end else begin
        if (drain) begin
          dcnt        <= dcnt - 1;
          drain_beats <= drain_beats + 1;
        end
        stall_cycles <= stall_cycles + 1;
      end
    end
  end

  // ---------------- t1: beat into the PE array ----------------
  tag_t tag1;
  logic last1, bank1;
  int unsigned bx1;
  logic [CCW-1:0] cc1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pe_valid <= 1'b0;
      tag1     <= '0;
      last1    <= 1'b0;
      bank1    <= 1'b0;
      bx1      <= 0;
      cc1      <= '0;
    end else begin
      pe_valid    <= issue || drain;
      tag1.real_b <= issue;
      tag1.k      <= KW'(k);
      tag1.x      <= XW'(x);
      tag1.mm     <= MMW'(mm);
      tag1.first  <= (cc == 0);
      tag1.last   <= (cc == NCC - 1);
      tag1.rowsel <= rowsel0;
      last1       <= issue && last_beat;
      bank1       <= bank;
      bx1         <= bx;
      cc1         <= CCW'(cc);
    end
  end

  always_comb
    for (int s = 0; s < S; s++) begin
      flush[s] = (bx1 == 0) && (s >= 1) && (s <= PC);
      zmac[s]  = (s > PC) && (bx1 < s - PC);
    end

  assign wsel      = bank1;
  assign wrel      = pe_valid && last1;
  assign wrel_bank = bank1;
  assign ls_cc     = cc1;

  // ---------------- t2: completed outputs ----------------
  tag_t tq [PC + 1];
  tag_t otag;
  assign tq[0] = tag1;
  assign otag  = tq[PC];

  for (genvar i = 1; i <= PC; i++) begin : g_tq
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)        tq[i] <= '0;
      else if (pe_valid) tq[i] <= tq[i-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid  <= 1'b0;
      o_addr   <= '0;
      o_first  <= 1'b0;
      o_last   <= 1'b0;
      o_rowsel <= '0;
      o_mm     <= '0;
    end else begin
      o_valid  <= pe_valid && otag.real_b;
      o_addr   <= AW'(int'(otag.k) * W + int'(otag.x));
      o_first  <= otag.first;
      o_last   <= otag.last;
      o_rowsel <= otag.rowsel;
      o_mm     <= otag.mm;
    end
  end

  a_wgt: assert property (@(posedge clk) disable iff (!rst_n) wrel |-> wfull[wrel_bank]);
endmodule
