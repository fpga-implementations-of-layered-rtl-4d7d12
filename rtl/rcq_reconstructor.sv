// rcq_reconstructor: the RCQ reconstruction R(.) of a VN bank.
//
// A multiplexer selects, by the quantized CN-to-VN magnitude index k
// (QW bits), the reconstruction value re_{k+1} of the current (iteration,
// layer); the result is the W-bit magnitude |U_mn| used in the AP-LLR update.
// The multiplexer structure follows the reconstruction logic of the
// reference design; the width W is a choice of this design.
//
// Interface: q (QW bits), re (packed, re[k] = re_{k+1}), mag (W bits).
// Timing: purely combinational.
module rcq_reconstructor #(
  parameter int unsigned QW  = 3,
  parameter int unsigned W   = 7,
  parameter int unsigned NRE = 1 << QW
) (
  input  logic [QW-1:0]          q,
  input  logic [NRE-1:0][W-1:0]  re,
  output logic [W-1:0]           mag
);
  assign mag = re[q];
endmodule
