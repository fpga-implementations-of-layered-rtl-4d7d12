// tb_rcq_quantizer: for 200 random ascending threshold sets (and the
// default ones) every magnitude 0..2^W-1 is quantized and compared with the
// number of thresholds it exceeds.
module tb_rcq_quantizer;
  localparam int unsigned QW = 3, W = 7, NTH = (1 << QW) - 1;
  logic [W-1:0] mag;
  logic [NTH-1:0][W-1:0] th;
  logic [QW-1:0] q;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  rcq_quantizer #(.QW(QW), .W(W)) dut (.mag, .th, .q);

  initial begin
    for (int set = 0; set < 201; set++) begin
      int v;
      v = 0;
      for (int k = 0; k < NTH; k++) begin
        if (set == 200) v = rcq_pkg::default_th(3, k + 1, 16, W);
        else begin v = v + $urandom % 19; if (v > 127) v = 127; end
        th[k] = W'(v);
      end
      for (int a = 0; a < (1 << W); a++) begin
        int exp_q;
        mag = W'(a);
        #1;
        exp_q = 0;
        for (int k = 0; k < NTH; k++) if (a > int'(th[k])) exp_q++;
        checks++;
        if (int'(q) != exp_q) begin
          failures++;
          if (failures < 10) $display("FAIL mag=%0d q=%0d expected %0d", a, q, exp_q);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
