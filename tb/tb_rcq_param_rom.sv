// tb_rcq_param_rom: a threshold and a reconstruction memory (small IMAX and
// MB) are read at every address and compared with the default formulas;
// then random words are written and read back with one cycle of latency.
module tb_rcq_param_rom;
  import rcq_pkg::*;
  localparam int unsigned IMAX = 4, MB = 6, BC = 4, BV = 8, W = 7, AW = 5;
  localparam int unsigned NTH = 7, NRE = 8;
  logic clk = 0;
  logic wr_en = 0;
  logic [AW-1:0] wr_addr = '0, raddr = '0;
  logic [NTH-1:0][W-1:0] th_wd = '0, th_rd;
  logic [NRE-1:0][W-1:0] re_wd = '0, re_rd;
  logic [NRE-1:0][W-1:0] re_model [IMAX * MB];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  rcq_param_rom #(.IMAX(IMAX), .MB(MB), .BC(BC), .BV(BV), .W(W), .KIND(1'b0)) u_th (
    .clk, .wr_en, .wr_addr, .wr_data(th_wd), .raddr, .rdata(th_rd));
  rcq_param_rom #(.IMAX(IMAX), .MB(MB), .BC(BC), .BV(BV), .W(W), .KIND(1'b1)) u_re (
    .clk, .wr_en, .wr_addr, .wr_data(re_wd), .raddr, .rdata(re_rd));

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    for (int a = 0; a < IMAX * MB; a++) begin
      @(negedge clk);
      raddr = AW'(a);
      @(negedge clk);
      for (int k = 0; k < NTH; k++)
        chk(int'(th_rd[k]) == default_th(a / MB, k + 1, IMAX, W), $sformatf("th addr %0d k %0d", a, k));
      for (int k = 0; k < NRE; k++)
        chk(int'(re_rd[k]) == default_re(a / MB, k + 1, IMAX, W), $sformatf("re addr %0d k %0d", a, k));
    end
    for (int a = 0; a < IMAX * MB; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a);
      for (int k = 0; k < NRE; k++) begin re_model[a][k] = W'($urandom); re_wd[k] = re_model[a][k]; end
      th_wd = re_wd[NTH-1:0];
    end
    @(negedge clk);
    wr_en = 0;
    for (int a = IMAX * MB - 1; a >= 0; a--) begin
      @(negedge clk);
      raddr = AW'(a);
      @(negedge clk);
      chk(re_rd == re_model[a], $sformatf("written re addr %0d", a));
      chk(th_rd == re_model[a][NTH-1:0], $sformatf("written th addr %0d", a));
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
