// tb_cn_pipeline: random layers (L = 8 lanes, degree 2..7, random shift per
// circulant, random bubbles) go through the CN pipeline. The testbench
// aligns the bank messages with the CNs itself (CN m of a circulant with
// shift p gets bank (m + p) mod L), computes MIN1/MIN2/SIGN/parity, and
// checks layer_done two cycles after the last input, syn_fail, and for every
// circulant of the layer the message returned to each VN bank one cycle
// after the request, while the next layer streams in.
module tb_cn_pipeline;
  localparam int unsigned L = 8, QW = 3, KW = 3, SW = 3, NL = 300;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  logic [SW-1:0] in_shift = '0;
  logic [L-1:0] in_sign = '0, in_hd = '0;
  logic [L-1:0][QW-1:0] in_mag = '0;
  logic layer_done, syn_fail;
  logic wb_valid = 0;
  logic [KW-1:0] wb_k = '0;
  logic [SW-1:0] wb_shift = '0;
  logic out_valid;
  logic [L-1:0] out_sign;
  logic [L-1:0][QW-1:0] out_mag;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  cn_pipeline #(.L(L), .QW(QW), .KW(KW)) dut (.*);

  int deg [NL];
  int shf [NL][8];
  int mag [NL][8][L], sg [NL][8][L], hd [NL][8][L];   // indexed by VN bank
  longint last_cyc [NL];

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    for (int n = 0; n < NL; n++) begin
      deg[n] = 2 + $urandom % 6;
      for (int k = 0; k < deg[n]; k++) begin
        shf[n][k] = $urandom % L;
        for (int j = 0; j < L; j++) begin
          mag[n][k][j] = $urandom % 8; sg[n][k][j] = $urandom % 2; hd[n][k][j] = (n % 4 == 0) ? 0 : $urandom % 2;
        end
      end
    end
  end

  initial begin
    longint prev_last;
    prev_last = -100;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < NL; n++) begin
      for (int k = 0; k < deg[n]; k++) begin
        while ($urandom % 6 == 0 || (k == deg[n] - 1 && n > 0 && cyc + 1 - prev_last < deg[n-1])) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_last  = (k == deg[n] - 1);
        in_shift = SW'(shf[n][k]);
        for (int j = 0; j < L; j++) begin
          in_mag[j] = QW'(mag[n][k][j]); in_sign[j] = sg[n][k][j]; in_hd[j] = hd[n][k][j];
        end
        if (in_last) begin prev_last = cyc + 1; last_cyc[n] = cyc + 1; end
        @(negedge clk);
      end
    end
    in_valid = 0;
    in_last = 0;
  end

  initial begin
    int n;
    n = 0;
    @(posedge rst_n);
    @(negedge clk);
    while (n < NL) begin
      if (!layer_done) @(negedge clk);
      else begin
        int m1 [L], m2 [L], ix [L], s [L], p [L];
        bit any;
        any = 0;
        for (int m = 0; m < L; m++) begin
          m1[m] = 7; m2[m] = 7; ix[m] = 0; s[m] = 0; p[m] = 0;
          for (int k = 0; k < deg[n]; k++) begin
            int j;
            j = (m + shf[n][k]) % L;
            s[m] ^= sg[n][k][j]; p[m] ^= hd[n][k][j];
            if (mag[n][k][j] < m1[m]) begin m2[m] = m1[m]; m1[m] = mag[n][k][j]; ix[m] = k; end
            else if (mag[n][k][j] < m2[m]) m2[m] = mag[n][k][j];
          end
          any |= p[m];
        end
        chk(cyc == last_cyc[n] + 1, $sformatf("layer %0d done at %0d, last at %0d", n, cyc, last_cyc[n]));
        chk(syn_fail == any, $sformatf("layer %0d parity", n));
        for (int k = 0; k < deg[n]; k++) begin
          wb_valid = 1; wb_k = KW'(k); wb_shift = SW'(shf[n][k]);
          @(negedge clk);
          wb_valid = 0;
          chk(out_valid, "out_valid");
          for (int j = 0; j < L; j++) begin
            int m;
            m = (j - shf[n][k] + L) % L;
            // the sign returned is the CN's total SIGN; the VN bank removes its own
            chk(out_sign[j] == s[m], $sformatf("layer %0d k %0d bank %0d sign", n, k, j));
            chk(int'(out_mag[j]) == ((ix[m] == k) ? m2[m] : m1[m]),
                $sformatf("layer %0d k %0d bank %0d mag", n, k, j));
          end
        end
        n++;   // the next layer may finish in the cycle this return ends
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
