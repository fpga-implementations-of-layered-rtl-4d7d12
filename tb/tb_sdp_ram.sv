// tb_sdp_ram: random simultaneous reads and writes against an array model;
// checks the one-cycle read latency, read-enable hold and old-data return
// when reading the address being written.
module tb_sdp_ram;
  localparam int unsigned DEPTH = 40, WIDTH = 9, AW = 6;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  int model [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sdp_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH), .AW(AW)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    int exp_d, last;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); model[a] = $urandom % (1 << WIDTH); wdata = WIDTH'(model[a]);
    end
    @(negedge clk);
    we = 0;
    last = -1;
    for (int n = 0; n < 3000; n++) begin
      int ra, wa;
      bit doread;
      @(negedge clk);
      ra = $urandom % DEPTH; wa = $urandom % DEPTH;
      doread = ($urandom % 4) != 0;
      re = doread; raddr = AW'(ra);
      we = $urandom % 2; waddr = AW'(wa); wdata = WIDTH'($urandom);
      if (doread) exp_d = model[ra];
      @(posedge clk);
      #1;
      if (we) model[wa] = int'(wdata);
      if (doread) last = exp_d;
      if (last >= 0) begin
        checks++;
        if (int'(rdata) != last) begin
          failures++;
          if (failures < 10) $display("FAIL read %0d expected %0d", rdata, last);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
