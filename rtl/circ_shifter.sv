// circ_shifter: L-lane circular shifter (barrel rotator) of the CN pipeline.
//
// A circulant that is the identity cyclically permuted by p connects CN m of
// the layer to the variable held by VN bank (m + p) mod L. In the forward
// direction (DIR = 0) lane m of the output takes input lane (m + p) mod L,
// aligning VN-bank messages with their CNs; in the reverse direction
// (DIR = 1) output lane j takes input lane (j - p) mod L, returning CN
// messages to their VN banks. Messages are WIDTH-bit words.
//
// Timing: combinational; the CN pipeline registers around it.
module circ_shifter #(
  parameter int unsigned L     = 64,
  parameter int unsigned WIDTH = 4,
  parameter bit          DIR   = 1'b0,
  parameter int unsigned SW    = (L > 1) ? $clog2(L) : 1
) (
  input  logic [L-1:0][WIDTH-1:0] din,
  input  logic [SW-1:0]           shift,
  output logic [L-1:0][WIDTH-1:0] dout
);
  always_comb begin
    for (int m = 0; m < L; m++) begin
      int unsigned src;
      if (DIR == 1'b0) src = (m + int'(shift)) % L;
      else             src = (m + L - int'(shift) % L) % L;
      dout[m] = din[src];
    end
  end
endmodule
