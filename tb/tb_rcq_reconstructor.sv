// tb_rcq_reconstructor: random reconstruction tables, every index checked.
module tb_rcq_reconstructor;
  localparam int unsigned QW = 3, W = 7, NRE = 1 << QW;
  logic [QW-1:0] q;
  logic [NRE-1:0][W-1:0] re;
  logic [W-1:0] mag;
  int exp_re [NRE];
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  rcq_reconstructor #(.QW(QW), .W(W)) dut (.q, .re, .mag);

  initial begin
    for (int set = 0; set < 300; set++) begin
      for (int k = 0; k < NRE; k++) begin
        exp_re[k] = $urandom % (1 << W);
        re[k] = W'(exp_re[k]);
      end
      for (int k = 0; k < NRE; k++) begin
        q = QW'(k);
        #1;
        checks++;
        if (int'(mag) != exp_re[k]) begin
          failures++;
          if (failures < 10) $display("FAIL q=%0d mag=%0d expected %0d", k, mag, exp_re[k]);
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
