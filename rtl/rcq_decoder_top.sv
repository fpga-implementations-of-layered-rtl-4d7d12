// rcq_decoder_top: layered MinSum RCQ (L-msRCQ) LDPC decoder, Broadcast method.
//
// A quasi-cyclic LDPC code with circulant size L is decoded layer by layer,
// a layer being one row of circulants (L check nodes). L VN banks hold the
// variables (bank j: variables j, L+j, ...); each cycle every bank computes
// one VN-to-CN message V_mn = V_n - U_mn for the current circulant,
// quantizes its magnitude to BC-1 bits with thresholds th^(i,l), and sends
// sign and magnitude to the CN pipeline. The CN pipeline aligns the L
// messages to their CNs with a circular shifter, accumulates MIN1/MIN2/SIGN
// over the layer, and returns MIN1 or MIN2 with SIGN per circulant through
// a second shifter. The banks reconstruct the magnitude with re^(i,l),
// form U_mn and update V_n = V_mn + U_mn. The control unit sequences reads
// and writebacks, overlaps adjacent layers, and broadcasts the (i,l)
// thresholds and reconstruction values to all banks from two central
// memories (the Broadcast method).
//
// Host interface (all synchronous to clk):
//   ld_we/ld_col/ld_llr  load the channel LLRs of block column ld_col (one
//                        BV-bit LLR per bank) while busy is low;
//   prm_*                optionally overwrite RCQ parameters (address i*MB+l);
//   start                begin decoding; busy high until done pulses with
//                        success (syndrome satisfied) and iters used;
//   hd_col/hd_bits       read the hard decisions of block column hd_col one
//                        cycle later while busy is low (bit j = variable
//                        hd_col*L + j, 1 = negative LLR).
// stall_cycles counts cycles the read side waited on a hazard in the last
// decode.
// Lint note: rst_n also appears in the assertion's disable condition, which
// a linter reports as a reset used both asynchronously and synchronously;
// the assertion is not logic.
module rcq_decoder_top #(
  parameter int unsigned L          = rcq_pkg::L_DEF,
  parameter int unsigned NB         = rcq_pkg::NB_DEF,
  parameter int unsigned MB         = rcq_pkg::MB_DEF,
  parameter int unsigned DI         = rcq_pkg::DI_DEF,
  parameter int unsigned IMAX       = rcq_pkg::IMAX_DEF,
  parameter int unsigned BC         = rcq_pkg::BC_DEF,
  parameter int unsigned BV         = rcq_pkg::BV_DEF,
  parameter bit          EARLY_TERM = 1'b1,
  parameter int unsigned W          = BV - 1,
  parameter int unsigned QW         = BC - 1,
  parameter int unsigned NRE        = 1 << QW,
  parameter int unsigned CW         = $clog2(NB),
  parameter int unsigned TW         = $clog2(IMAX * MB),
  parameter int unsigned IW         = $clog2(IMAX + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output logic                        success,
  output logic [IW-1:0]               iters,
  output logic [31:0]                 stall_cycles,
  input  logic                        ld_we,
  input  logic [CW-1:0]               ld_col,
  input  logic [L-1:0][BV-1:0]        ld_llr,
  input  logic [CW-1:0]               hd_col,
  output logic [L-1:0]                hd_bits,
  input  logic                        prm_we,
  input  logic                        prm_is_re,
  input  logic [TW-1:0]               prm_addr,
  input  logic [NRE-1:0][W-1:0]       prm_data
);
  localparam int unsigned NTH = (1 << QW) - 1;
  localparam int unsigned E   = rcq_pkg::num_edges(MB, DI);
  localparam int unsigned EW  = $clog2(E);
  localparam int unsigned SW  = $clog2(L);
  localparam int unsigned KW  = $clog2(rcq_pkg::max_deg(DI));

  logic                  rd_valid, rd_first;
  logic [CW-1:0]         rd_col;
  logic [EW-1:0]         rd_edge;
  logic [NTH-1:0][W-1:0] th;
  logic                  cn_valid, cn_last;
  logic [SW-1:0]         cn_shift;
  logic                  layer_done, syn_fail;
  logic                  wb_valid;
  logic [KW-1:0]         wb_k;
  logic [SW-1:0]         wb_shift;
  logic                  vb_valid;
  logic [CW-1:0]         vb_col;
  logic [EW-1:0]         vb_edge;
  logic [NRE-1:0][W-1:0] re;
  logic [L-1:0]          flips;

  logic [L-1:0]          v_sign, v_hd, u_sign;
  logic [L-1:0][QW-1:0]  v_mag, u_mag;
  logic                  u_valid;

  ctrl_unit #(.L(L), .NB(NB), .MB(MB), .DI(DI), .IMAX(IMAX), .BC(BC), .BV(BV),
              .EARLY_TERM(EARLY_TERM)) u_ctrl (
    .clk, .rst_n,
    .start, .busy, .done, .success, .iters, .stall_cycles,
    .prm_we, .prm_is_re, .prm_addr, .prm_data,
    .rd_valid, .rd_col, .rd_edge, .rd_first, .th,
    .cn_valid, .cn_last, .cn_shift, .layer_done, .syn_fail,
    .wb_valid, .wb_k, .wb_shift,
    .vb_valid, .vb_col, .vb_edge, .re,
    .flip_any(|flips));

  for (genvar j = 0; j < L; j++) begin : g_bank
    vn_bank #(.NB(NB), .E(E), .BV(BV), .QW(QW), .W(W)) u_bank (
      .clk, .rst_n,
      .rd_valid, .rd_col, .rd_edge, .rd_first, .th,
      .v_sign(v_sign[j]), .v_mag(v_mag[j]), .v_hd(v_hd[j]),
      .wb_valid(vb_valid), .wb_col(vb_col), .wb_edge(vb_edge),
      .u_sign(u_sign[j]), .u_mag(u_mag[j]), .re,
      .flip(flips[j]),
      .ld_we, .ld_col, .ld_llr(ld_llr[j]),
      .hd_col, .hd_bit(hd_bits[j]));
  end

  cn_pipeline #(.L(L), .QW(QW), .KW(KW)) u_cn (
    .clk, .rst_n,
    .in_valid(cn_valid), .in_last(cn_last), .in_shift(cn_shift),
    .in_sign(v_sign), .in_mag(v_mag), .in_hd(v_hd),
    .layer_done, .syn_fail,
    .wb_valid, .wb_k, .wb_shift,
    .out_valid(u_valid), .out_sign(u_sign), .out_mag(u_mag));

  // the CN return and the bank-side controls are produced in the same cycle
  assert property (@(posedge clk) disable iff (!rst_n) u_valid == vb_valid);
endmodule
