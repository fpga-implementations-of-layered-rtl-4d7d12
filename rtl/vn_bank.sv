// vn_bank: one variable-node bank of the layered L-msRCQ decoder.
//
// Bank j holds the NB variables j, L+j, 2L+j, ... (one per block column, so
// the block column is the RAM address) in three one-read/one-write RAMs:
//   V_n  RAM (NB x BV)      a-posteriori LLRs, loaded with channel LLRs;
//   U_mn RAM (E x BV)       last CN-to-VN message of every edge (address =
//                           edge number in read order);
//   V_mn RAM (NB x (BV+1))  VN-to-CN message of the layer in flight, plus
//                           the hard decision V_n had when it was read.
// Read path (cycle t: rd_*; t+1: th_*; t+2: v_*): V_mn = V_n - U_mn (U_mn
// taken as 0 in the first iteration) is saturated to +-(2^(BV-1)-1) and
// stored; its sign goes to the CN pipeline and its magnitude through the
// quantizer Q(.) with the broadcast thresholds.
// Return path (cycle u: wb_*, u_sign, u_mag; u+1: re_*; u+2: flip): V_mn is
// read back, the returned magnitude index is reconstructed by R(.), the
// sign is CN SIGN XOR sign(V_mn), the signed U_mn is stored and
// V_n = sat(V_mn + U_mn) written back. flip reports that the hard decision
// of the updated variable changed (used by the syndrome check).
// Host port: ld_* writes a channel LLR (only while no decoding runs);
// hd_col reads a hard decision, hd_bit valid one cycle later when rd_valid
// was low.
// The datapath (subtract, clip/quantize, MSB XOR, add, three RAMs) follows
// the reference VN bank; saturation widths, symmetric saturation, the stored
// hard decision and the host port are choices of this design.
module vn_bank #(
  parameter int unsigned NB  = 256,
  parameter int unsigned E   = 703,
  parameter int unsigned BV  = 8,
  parameter int unsigned QW  = 3,
  parameter int unsigned W   = BV - 1,
  parameter int unsigned NTH = (1 << QW) - 1,
  parameter int unsigned NRE = 1 << QW,
  parameter int unsigned CW  = (NB > 1) ? $clog2(NB) : 1,
  parameter int unsigned EW  = (E > 1) ? $clog2(E) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // read path
  input  logic                  rd_valid,
  input  logic [CW-1:0]         rd_col,
  input  logic [EW-1:0]         rd_edge,
  input  logic                  rd_first,
  input  logic [NTH-1:0][W-1:0] th,
  output logic                  v_sign,
  output logic [QW-1:0]         v_mag,
  output logic                  v_hd,
  // return path
  input  logic                  wb_valid,
  input  logic [CW-1:0]         wb_col,
  input  logic [EW-1:0]         wb_edge,
  input  logic                  u_sign,
  input  logic [QW-1:0]         u_mag,
  input  logic [NRE-1:0][W-1:0] re,
  output logic                  flip,
  // host
  input  logic                  ld_we,
  input  logic [CW-1:0]         ld_col,
  input  logic signed [BV-1:0]  ld_llr,
  input  logic [CW-1:0]         hd_col,
  output logic                  hd_bit
);
  localparam logic signed [BV:0] VMAX = (BV+1)'((1 << (BV - 1)) - 1);

  function automatic logic signed [BV-1:0] sat(input logic signed [BV:0] x);
    if (x > VMAX)       return VMAX[BV-1:0];
    else if (x < -VMAX) return -VMAX[BV-1:0];
    else                return x[BV-1:0];
  endfunction

  // ---------------------------------------------------------------- RAMs
  logic                 vn_we;
  logic [CW-1:0]        vn_waddr, vn_raddr;
  logic signed [BV-1:0] vn_wdata, vn_rdata;
  logic                 u_we;
  logic [EW-1:0]        u_waddr;
  logic signed [BV-1:0] u_wdata, u_rdata;
  logic                 vm_we;
  logic [CW-1:0]        vm_waddr;
  logic [BV:0]          vm_wdata, vm_rdata;

  sdp_ram #(.DEPTH(NB), .WIDTH(BV), .AW(CW)) u_vn_ram (
    .clk, .we(vn_we), .waddr(vn_waddr), .wdata(vn_wdata),
    .re(1'b1), .raddr(vn_raddr), .rdata(vn_rdata));

  sdp_ram #(.DEPTH(E), .WIDTH(BV), .AW(EW)) u_u_ram (
    .clk, .we(u_we), .waddr(u_waddr), .wdata(u_wdata),
    .re(rd_valid), .raddr(rd_edge), .rdata(u_rdata));

  sdp_ram #(.DEPTH(NB), .WIDTH(BV + 1), .AW(CW)) u_vmn_ram (
    .clk, .we(vm_we), .waddr(vm_waddr), .wdata(vm_wdata),
    .re(wb_valid), .raddr(wb_col), .rdata(vm_rdata));

  assign vn_raddr = rd_valid ? rd_col : hd_col;
  assign hd_bit   = vn_rdata[BV-1];

  // ---------------------------------------------------------------- read path
  logic                 r1_valid, r1_first;
  logic [CW-1:0]        r1_col;
  logic signed [BV-1:0] r1_u, vmn;
  logic [W-1:0]         vmn_abs;
  logic [QW-1:0]        q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r1_valid <= 1'b0;
    else        r1_valid <= rd_valid;
  end

  always_ff @(posedge clk) begin
    r1_col   <= rd_col;
    r1_first <= rd_first;
  end

  assign r1_u    = r1_first ? '0 : u_rdata;
  assign vmn     = sat((BV+1)'(vn_rdata) - (BV+1)'(r1_u));
  assign vmn_abs = vmn[BV-1] ? W'(-vmn) : W'(vmn);

  rcq_quantizer #(.QW(QW), .W(W), .NTH(NTH)) u_q (.mag(vmn_abs), .th(th), .q(q));

  assign vm_we    = r1_valid;
  assign vm_waddr = r1_col;
  assign vm_wdata = {vn_rdata[BV-1], vmn};

  always_ff @(posedge clk) begin
    v_sign <= vmn[BV-1];
    v_mag  <= q;
    v_hd   <= vn_rdata[BV-1];
  end

  // ---------------------------------------------------------------- return path
  logic                 w1_valid, w1_sign;
  logic [CW-1:0]        w1_col;
  logic [EW-1:0]        w1_edge;
  logic [QW-1:0]        w1_mag;
  logic [W-1:0]         umag;
  logic signed [BV-1:0] vmn_old, unew, vnew;
  logic                 hd_old;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) w1_valid <= 1'b0;
    else        w1_valid <= wb_valid;
  end

  always_ff @(posedge clk) begin
    w1_col  <= wb_col;
    w1_edge <= wb_edge;
    w1_sign <= u_sign;
    w1_mag  <= u_mag;
  end

  rcq_reconstructor #(.QW(QW), .W(W), .NRE(NRE)) u_r (.q(w1_mag), .re(re), .mag(umag));

  assign hd_old  = vm_rdata[BV];
  assign vmn_old = vm_rdata[BV-1:0];
  assign unew    = (w1_sign ^ vmn_old[BV-1]) ? -$signed({1'b0, umag}) : $signed({1'b0, umag});
  assign vnew    = sat((BV+1)'(vmn_old) + (BV+1)'(unew));

  assign u_we     = w1_valid;
  assign u_waddr  = w1_edge;
  assign u_wdata  = unew;
  assign vn_we    = w1_valid | ld_we;
  assign vn_waddr = w1_valid ? w1_col : ld_col;
  assign vn_wdata = w1_valid ? vnew : ld_llr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) flip <= 1'b0;
    else        flip <= w1_valid & (vnew[BV-1] != hd_old);
  end
endmodule
