// sdp_ram: simple dual-port RAM, one synchronous read and one write per cycle.
//
// Used for the three memories of a VN bank (AP-LLRs V_n, CN-to-VN messages
// U_mn and VN-to-CN messages V_mn), each of which needs one read and one
// write per clock. The read returns the stored word one cycle after the
// address is presented (block-RAM style). A read of the address being
// written in the same cycle returns the old word; the decoder's control
// unit never relies on that case. There is no reset: contents are written
// before they are read.
//
// Interface: we/waddr/wdata (write), re/raddr (read enable/address), rdata.
module sdp_ram #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 8,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
