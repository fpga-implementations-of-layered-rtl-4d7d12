// cn_min_unit: MIN1 / MIN2 / SIGN calculation for the L check nodes of a layer.
//
// The VN-to-CN messages of a layer arrive one circulant per cycle, already
// aligned with the CN lanes (in_valid; in_last marks the layer's last
// circulant). Each lane keeps the smallest magnitude index (MIN1), the
// second smallest (MIN2), the position within the layer of the message that
// gave MIN1 (IDX) and the XOR of the message signs (SIGN). It also XORs the
// hard decisions of the variables (sign of V_n) for the syndrome check.
// When the last circulant arrives the finished values move to a result
// register and layer_done pulses for one cycle, with syn_fail set if any
// CN's hard-decision parity is odd; accumulation of the next layer starts at
// once (layers overlap).
//
// Return path: for circulant position wb_k the lane outputs SIGN and MIN2 if
// this circulant supplied MIN1, MIN1 otherwise (MinSum, no offset). The
// result register must not be overwritten before the return of its layer
// has finished; the control unit spaces layer ends for that.
//
// Follows the reference design for MIN1/MIN2/SIGN and the MIN1-or-MIN2
// selection; the hard-decision parity (syndrome) and the double buffering
// are choices of this design. Equal magnitudes: the later one becomes MIN2.
// Timing: result visible the cycle after in_last; return outputs are
// combinational from the result register and wb_k.
module cn_min_unit #(
  parameter int unsigned L  = 64,
  parameter int unsigned QW = 3,
  parameter int unsigned KW = 3     // bits of the position within a layer
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // accumulation
  input  logic                 in_valid,
  input  logic                 in_last,
  input  logic [L-1:0]         in_sign,
  input  logic [L-1:0][QW-1:0] in_mag,
  input  logic [L-1:0]         in_hd,
  output logic                 layer_done,
  output logic                 syn_fail,
  // return
  input  logic [KW-1:0]        wb_k,
  output logic [L-1:0]         out_sign,
  output logic [L-1:0][QW-1:0] out_mag
);
  typedef struct packed {
    logic [QW-1:0] min1;
    logic [QW-1:0] min2;
    logic [KW-1:0] idx;
    logic          sign;
    logic          par;
  } cn_state_t;

  localparam cn_state_t FRESH = '{min1: '1, min2: '1, idx: '0, sign: 1'b0, par: 1'b0};

  cn_state_t         acc   [L];
  cn_state_t         res   [L];
  cn_state_t         nxt   [L];
  logic [KW-1:0]     pos;          // position of the incoming circulant in its layer

  always_comb begin
    for (int m = 0; m < L; m++) begin
      cn_state_t b;
      b = (pos == '0) ? FRESH : acc[m];
      nxt[m] = b;
      nxt[m].sign = b.sign ^ in_sign[m];
      nxt[m].par  = b.par ^ in_hd[m];
      if (in_mag[m] < b.min1) begin
        nxt[m].min2 = b.min1;
        nxt[m].min1 = in_mag[m];
        nxt[m].idx  = pos;
      end else if (in_mag[m] < b.min2) begin
        nxt[m].min2 = in_mag[m];
      end
    end
  end

  // some CN of the layer sees an odd number of negative hard decisions
  logic odd_par;
  always_comb begin
    odd_par = 1'b0;
    for (int m = 0; m < L; m++) odd_par |= nxt[m].par;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos        <= '0;
      layer_done <= 1'b0;
      syn_fail   <= 1'b0;
    end else begin
      layer_done <= in_valid & in_last;
      if (in_valid) pos <= in_last ? '0 : pos + 1'b1;
      if (in_valid & in_last) syn_fail <= odd_par;
    end
  end

  always_ff @(posedge clk) begin
    for (int m = 0; m < L; m++) begin
      if (in_valid) acc[m] <= nxt[m];
      if (in_valid & in_last) res[m] <= nxt[m];
    end
  end

  always_comb begin
    for (int m = 0; m < L; m++) begin
      out_sign[m] = res[m].sign;
      out_mag[m]  = (res[m].idx == wb_k) ? res[m].min2 : res[m].min1;
    end
  end
endmodule
