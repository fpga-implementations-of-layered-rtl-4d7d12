// cn_pipeline: the check-node pipeline of the layered decoder (L CNs in parallel).
//
// Forward path: each cycle the L VN banks deliver the quantized VN-to-CN
// messages of one circulant (sign, magnitude index) together with the hard
// decision of each variable. A circular shifter rotates them by the
// circulant's shift amount so that lane m carries the message for CN m, and
// the result is registered. cn_min_unit then accumulates MIN1, MIN2 and
// SIGN over the layer.
// Return path: for each circulant of a finished layer the control unit gives
// its position wb_k and shift; each lane selects MIN1 or MIN2 with SIGN, a
// second circular shifter rotates back by the same amount so that output
// lane j belongs to VN bank j, and the result is registered.
// L-msRCQ uses plain MinSum, so no offset is subtracted.
//
// Timing: input at cycle t reaches the accumulator at t+1; layer_done
// pulses the cycle after the accumulator sees in_last. Return request at
// cycle u gives out_* at u+1. The structure (shift, MIN1/MIN2/SIGN,
// unshift) follows the reference design; carrying the hard decisions for the
// syndrome check is a choice of this design.
module cn_pipeline #(
  parameter int unsigned L  = 64,
  parameter int unsigned QW = 3,
  parameter int unsigned KW = 3,
  parameter int unsigned SW = (L > 1) ? $clog2(L) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // from the VN banks
  input  logic                 in_valid,
  input  logic                 in_last,
  input  logic [SW-1:0]        in_shift,
  input  logic [L-1:0]         in_sign,
  input  logic [L-1:0][QW-1:0] in_mag,
  input  logic [L-1:0]         in_hd,
  output logic                 layer_done,
  output logic                 syn_fail,
  // return requests from the control unit
  input  logic                 wb_valid,
  input  logic [KW-1:0]        wb_k,
  input  logic [SW-1:0]        wb_shift,
  // to the VN banks
  output logic                 out_valid,
  output logic [L-1:0]         out_sign,
  output logic [L-1:0][QW-1:0] out_mag
);
  localparam int unsigned FW = QW + 2;   // {sign, hd, magnitude}

  logic [L-1:0][FW-1:0] fwd_in, fwd_sh;
  logic                 a_valid, a_last;
  logic [L-1:0]         a_sign, a_hd;
  logic [L-1:0][QW-1:0] a_mag;

  always_comb begin
    for (int j = 0; j < L; j++) fwd_in[j] = {in_sign[j], in_hd[j], in_mag[j]};
  end

  circ_shifter #(.L(L), .WIDTH(FW), .DIR(1'b0)) u_shift (
    .din(fwd_in), .shift(in_shift), .dout(fwd_sh));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid <= 1'b0;
      a_last  <= 1'b0;
    end else begin
      a_valid <= in_valid;
      a_last  <= in_valid & in_last;
    end
  end

  always_ff @(posedge clk) begin
    for (int m = 0; m < L; m++) begin
      a_sign[m] <= fwd_sh[m][FW-1];
      a_hd[m]   <= fwd_sh[m][FW-2];
      a_mag[m]  <= fwd_sh[m][QW-1:0];
    end
  end

  logic [L-1:0]         c_sign;
  logic [L-1:0][QW-1:0] c_mag;

  cn_min_unit #(.L(L), .QW(QW), .KW(KW)) u_min (
    .clk, .rst_n,
    .in_valid(a_valid), .in_last(a_last),
    .in_sign(a_sign), .in_mag(a_mag), .in_hd(a_hd),
    .layer_done, .syn_fail,
    .wb_k, .out_sign(c_sign), .out_mag(c_mag));

  logic [L-1:0][QW:0] ret_in, ret_sh;

  always_comb begin
    for (int m = 0; m < L; m++) ret_in[m] = {c_sign[m], c_mag[m]};
  end

  circ_shifter #(.L(L), .WIDTH(QW + 1), .DIR(1'b1)) u_unshift (
    .din(ret_in), .shift(wb_shift), .dout(ret_sh));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= wb_valid;
  end

  always_ff @(posedge clk) begin
    for (int j = 0; j < L; j++) begin
      out_sign[j] <= ret_sh[j][QW];
      out_mag[j]  <= ret_sh[j][QW-1:0];
    end
  end
endmodule
