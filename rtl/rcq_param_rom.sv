// rcq_param_rom: central RCQ parameter memory of the Broadcast method.
//
// Indexed by (iteration i, layer l) as address i*MB + l, each word holds
// either the NV quantization thresholds th_1..th_NV (KIND = 0, NV =
// 2^QW - 1) or the NV reconstruction values re_1..re_NV (KIND = 1,
// NV = 2^QW), W bits each, word[k-1] = th_k / re_k. The word read is wired
// to every VN bank. One memory of each kind sits in the control unit, as in
// the reference design. Contents are initialised from the default formula in
// rcq_pkg; a write port (wr_*) lets a host replace them with parameters
// designed for the code in use (the reference design uses a ROM; the write
// port is a choice of this design).
//
// Timing: synchronous read, rdata valid the cycle after raddr.
module rcq_param_rom #(
  parameter int unsigned IMAX = 16,
  parameter int unsigned MB   = 128,
  parameter int unsigned BC   = 4,
  parameter int unsigned BV   = 8,
  parameter int unsigned W    = BV - 1,
  parameter bit          KIND = 1'b0,
  parameter int unsigned QW   = BC - 1,
  parameter int unsigned NV   = KIND ? (1 << QW) : (1 << QW) - 1,
  parameter int unsigned AW   = $clog2(IMAX * MB)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [NV-1:0][W-1:0] wr_data,
  input  logic [AW-1:0]        raddr,
  output logic [NV-1:0][W-1:0] rdata
);
  import rcq_pkg::*;

  logic [NV-1:0][W-1:0] mem [IMAX * MB];

  initial begin
    for (int unsigned i = 0; i < IMAX; i++)
      for (int unsigned l = 0; l < MB; l++)
        for (int unsigned k = 0; k < NV; k++)
          mem[i * MB + l][k] = KIND ? W'(default_re(i, k + 1, IMAX, W))
                                    : W'(default_th(i, k + 1, IMAX, W));
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rdata <= mem[raddr];
  end
endmodule
