// tb_cn_min_unit: random layers of degree 2..8 (L = 4 lanes) are streamed
// back to back with random bubbles; layer ends are spaced as the control
// unit spaces them (at least the previous degree in cycles). For each
// finished layer the unit must pulse layer_done one cycle after the last
// input, report the hard-decision parity, and return for every position k
// the XOR of all signs and MIN2 if k supplied MIN1, MIN1 otherwise, while
// the next layer is already accumulating.
module tb_cn_min_unit;
  localparam int unsigned L = 4, QW = 3, KW = 3, NL = 400;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  logic [L-1:0] in_sign = '0, in_hd = '0;
  logic [L-1:0][QW-1:0] in_mag = '0;
  logic layer_done, syn_fail;
  logic [KW-1:0] wb_k = '0;
  logic [L-1:0] out_sign;
  logic [L-1:0][QW-1:0] out_mag;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  cn_min_unit #(.L(L), .QW(QW), .KW(KW)) dut (.*);

  int deg [NL];
  int mag [NL][8][L], sg [NL][8][L], hd [NL][8][L];
  longint last_cyc [NL];

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    for (int n = 0; n < NL; n++) begin
      deg[n] = 2 + $urandom % 7;
      for (int k = 0; k < deg[n]; k++)
        for (int m = 0; m < L; m++) begin
          mag[n][k][m] = (n % 5 == 0) ? $urandom % 3 : $urandom % 8;  // ties on some layers
          sg[n][k][m] = $urandom % 2;
          hd[n][k][m] = (n % 3 == 0) ? 0 : $urandom % 2;
        end
    end
  end

  // feeder
  initial begin
    longint prev_last;
    prev_last = -100;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < NL; n++) begin
      for (int k = 0; k < deg[n]; k++) begin
        while ($urandom % 5 == 0 || (k == deg[n] - 1 && n > 0 && cyc + 1 - prev_last < deg[n-1])) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_last  = (k == deg[n] - 1);
        for (int m = 0; m < L; m++) begin
          in_mag[m] = QW'(mag[n][k][m]); in_sign[m] = sg[n][k][m]; in_hd[m] = hd[n][k][m];
        end
        if (in_last) begin prev_last = cyc + 1; last_cyc[n] = cyc + 1; end
        @(negedge clk);
      end
    end
    in_valid = 0;
    in_last = 0;
  end

  // checker
  initial begin
    int n;
    n = 0;
    @(posedge rst_n);
    while (n < NL) begin
      @(negedge clk);
      if (layer_done) begin
        int m1 [L], m2 [L], ix [L], s [L], p [L];
        bit any;
        any = 0;
        for (int m = 0; m < L; m++) begin
          m1[m] = 7; m2[m] = 7; ix[m] = 0; s[m] = 0; p[m] = 0;
          for (int k = 0; k < deg[n]; k++) begin
            s[m] ^= sg[n][k][m]; p[m] ^= hd[n][k][m];
            if (mag[n][k][m] < m1[m]) begin m2[m] = m1[m]; m1[m] = mag[n][k][m]; ix[m] = k; end
            else if (mag[n][k][m] < m2[m]) m2[m] = mag[n][k][m];
          end
          any |= p[m];
        end
        chk(cyc == last_cyc[n], $sformatf("layer %0d done at %0d, last at %0d", n, cyc, last_cyc[n]));
        chk(syn_fail == any, $sformatf("layer %0d parity", n));
        for (int k = 0; k < deg[n]; k++) begin
          wb_k = KW'(k);
          #1;
          for (int m = 0; m < L; m++) begin
            chk(out_sign[m] == s[m], $sformatf("layer %0d k %0d lane %0d sign", n, k, m));
            chk(int'(out_mag[m]) == ((ix[m] == k) ? m2[m] : m1[m]),
                $sformatf("layer %0d k %0d lane %0d mag %0d", n, k, m, out_mag[m]));
          end
          if (k != deg[n] - 1) @(negedge clk);
        end
        n++;
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
