// rcq_quantizer: the RCQ quantizer Q(.) of a VN bank (Broadcast / Dribble form).
//
// The magnitude |V_mn| of a VN-to-CN message (W bits) is compared against the
// 2^QW - 1 thresholds th_1 .. th_{2^QW-1} of the current (iteration, layer)
// with one "greater than" comparator each. For ascending thresholds the
// comparator outputs form a thermometer code; the thermometer-to-binary
// decoder returns the position of its highest set bit, i.e. the quantized
// magnitude index k such that th_k < |V| <= th_{k+1} (th_0 = -inf).
// Structure (comparators + thermometer-to-binary decoder) follows the
// quantization logic of the reference design; the W-bit parameter width and
// the "highest set bit" form of the decoder are choices of this design.
//
// Interface: mag (W bits), th (packed, th[k-1] = th_k), q (QW bits).
// Timing: purely combinational.
module rcq_quantizer #(
  parameter int unsigned QW  = 3,              // b^c - 1 magnitude index bits
  parameter int unsigned W   = 7,              // width of |V| and of each threshold
  parameter int unsigned NTH = (1 << QW) - 1
) (
  input  logic [W-1:0]           mag,
  input  logic [NTH-1:0][W-1:0]  th,
  output logic [QW-1:0]          q
);
  logic [NTH-1:0] therm;

  always_comb begin
    for (int k = 0; k < NTH; k++) therm[k] = (mag > th[k]);
  end

  // thermometer-to-binary: index of the highest comparator that fired, plus one
  always_comb begin
    q = '0;
    for (int k = 0; k < NTH; k++)
      if (therm[k]) q = QW'(k + 1);
  end
endmodule
