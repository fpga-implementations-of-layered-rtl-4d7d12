// tb_vn_bank: one VN bank (8 block columns, 12 edges) is loaded with random
// LLRs and then exercised in rounds: a burst of back-to-back reads of
// distinct columns (V_mn = V_n - U_mn, or U_mn = 0 in a "first iteration"
// round), then the matching burst of writebacks with random CN signs and
// magnitude indices. Thresholds and reconstruction values are random
// ascending sets that change every round. A model of the VN arithmetic
// predicts the quantized outputs two cycles after each read, the flip flag
// two cycles after each writeback, and the hard decisions read through the
// host port at the end.
module tb_vn_bank;
  localparam int unsigned NB = 8, E = 12, BV = 8, QW = 3, W = 7, NTH = 7, NRE = 8, CW = 3, EW = 4;
  localparam int VMAX = 127;
  logic clk = 0, rst_n = 0;
  logic rd_valid = 0, rd_first = 0;
  logic [CW-1:0] rd_col = '0;
  logic [EW-1:0] rd_edge = '0;
  logic [NTH-1:0][W-1:0] th = '0;
  logic v_sign, v_hd;
  logic [QW-1:0] v_mag;
  logic wb_valid = 0, u_sign = 0;
  logic [CW-1:0] wb_col = '0;
  logic [EW-1:0] wb_edge = '0;
  logic [QW-1:0] u_mag = '0;
  logic [NRE-1:0][W-1:0] re = '0;
  logic flip;
  logic ld_we = 0;
  logic [CW-1:0] ld_col = '0, hd_col = '0;
  logic signed [BV-1:0] ld_llr = '0;
  logic hd_bit;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  vn_bank #(.NB(NB), .E(E), .BV(BV), .QW(QW), .W(W)) dut (.*);

  int mVn [NB], mU [E], mVmn [NB], mHd [NB];
  int thv [NTH], rev [NRE];
  int cnt_flip = 0;
  bit written [E] = '{default: 1'b0};

  function automatic int sat(int x);
    return (x > VMAX) ? VMAX : (x < -VMAX) ? -VMAX : x;
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NB; c++) begin
      @(negedge clk);
      ld_we = 1; ld_col = CW'(c); mVn[c] = int'($urandom % 255) - 127; ld_llr = BV'(mVn[c]);
    end
    @(negedge clk);
    ld_we = 0;
    for (int e = 0; e < E; e++) mU[e] = 0;
    for (int round = 0; round < 300; round++) begin
      int d, v;
      int cols [4], edges [4], q [4], s [4], h [4];
      int us [4], um [4];
      bit first;
      first = (round == 0) || ($urandom % 8 == 0);
      v = 0;
      for (int k = 0; k < NTH; k++) begin v += $urandom % 20; if (v > 127) v = 127; thv[k] = v; th[k] = W'(v); end
      v = 0;
      for (int k = 0; k < NRE; k++) begin v += $urandom % 20; if (v > 127) v = 127; rev[k] = v; re[k] = W'(v); end
      d = 1 + $urandom % 4;
      for (int k = 0; k < d; k++) begin
        bit dup;
        do begin
          cols[k] = $urandom % NB; dup = 0;
          for (int i = 0; i < k; i++) if (cols[i] == cols[k]) dup = 1;
        end while (dup);
        edges[k] = (cols[k] + NB * ($urandom % 2)) % E;
        if (!written[edges[k]]) first = 1;   // the U_mn RAM holds nothing there yet
      end
      for (int k = 0; k < d; k++) begin
        if (first) mU[edges[k]] = 0;
        written[edges[k]] = 1;
      end
      // expected read results
      for (int k = 0; k < d; k++) begin
        int vm, a;
        vm = sat(mVn[cols[k]] - mU[edges[k]]);
        mVmn[cols[k]] = vm; mHd[cols[k]] = (mVn[cols[k]] < 0);
        a = (vm < 0) ? -vm : vm;
        q[k] = 0;
        for (int i = 0; i < NTH; i++) if (a > thv[i]) q[k] = i + 1;
        s[k] = (vm < 0); h[k] = mHd[cols[k]];
      end
      // read burst; outputs two cycles after each request
      for (int k = 0; k < d + 2; k++) begin
        @(negedge clk);
        if (k >= 2) begin
          chk(v_sign == s[k-2], $sformatf("round %0d read %0d sign", round, k - 2));
          chk(int'(v_mag) == q[k-2], $sformatf("round %0d read %0d mag %0d exp %0d", round, k - 2, v_mag, q[k-2]));
          chk(v_hd == h[k-2], $sformatf("round %0d read %0d hd", round, k - 2));
        end
        rd_valid = (k < d);
        if (k < d) begin rd_col = CW'(cols[k]); rd_edge = EW'(edges[k]); rd_first = first; end
      end
      rd_valid = 0;
      // writeback burst; flip two cycles after each request
      for (int k = 0; k < d; k++) begin us[k] = $urandom % 2; um[k] = $urandom % NRE; end
      for (int k = 0; k < d + 2; k++) begin
        @(negedge clk);
        if (k >= 2) begin
          int c, u, vn;
          c  = cols[k-2];
          u  = (us[k-2] ^ (mVmn[c] < 0)) ? -rev[um[k-2]] : rev[um[k-2]];
          vn = sat(mVmn[c] + u);
          chk(flip == ((vn < 0) != mHd[c]), $sformatf("round %0d writeback %0d flip", round, k - 2));
          if ((vn < 0) != mHd[c]) cnt_flip++;
          mVn[c] = vn; mU[edges[k-2]] = u;
        end
        wb_valid = (k < d);
        if (k < d) begin wb_col = CW'(cols[k]); wb_edge = EW'(edges[k]); u_sign = us[k]; u_mag = QW'(um[k]); end
      end
      wb_valid = 0;
    end
    for (int c = 0; c < NB; c++) begin
      @(negedge clk);
      hd_col = CW'(c);
      @(negedge clk);
      chk(hd_bit == (mVn[c] < 0), $sformatf("host hard decision col %0d", c));
    end
    chk(cnt_flip > 0, "no flip happened");
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
