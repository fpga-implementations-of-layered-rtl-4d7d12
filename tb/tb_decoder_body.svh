// Shared body of the decoder end-to-end testbenches. The including module
// declares L, NB, MB, DI, IMAX, BC, BV, NFRAMES and SIGMAS and instantiates
// the decoder as `dut` on the signals declared here.
//
// Each frame: random information bits are encoded with the dual-diagonal
// structure of the default code (parity of layer r = parity of layer r-1
// XOR the information bits it checks), sent as BPSK over an AWGN channel
// (Gaussian noise from a sum of 12 uniforms), and quantized to BV-bit LLRs.
// A bit-exact model of sequential layered L-msRCQ decoding, written here
// independently of the RTL, predicts the iteration count, the success flag
// and every hard decision; the decoder must match all of them. Successful
// frames are also checked against the parity-check equations directly.
// The including module also defines end_test(), which prints the result
// line and ends the simulation.
// Coverage: hazard stalls, layer overlap, early termination, frames that run
// out of iterations and a frame with host-written RCQ parameters must each
// occur at least once.

  import rcq_pkg::*;

  localparam int unsigned KB  = NB - MB;
  localparam int unsigned E   = num_edges(MB, DI);
  localparam int unsigned QW  = BC - 1;
  localparam int unsigned W   = BV - 1;
  localparam int unsigned NTH = (1 << QW) - 1;
  localparam int unsigned NRE = 1 << QW;
  localparam int unsigned CW  = $clog2(NB);
  localparam int unsigned TW  = $clog2(IMAX * MB);
  localparam int unsigned IW  = $clog2(IMAX + 1);
  localparam int          VMAX = (1 << (BV - 1)) - 1;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, busy, done, success;
  logic [IW-1:0] iters;
  logic [31:0] stall_cycles;
  logic ld_we = 1'b0;
  logic [CW-1:0] ld_col = '0;
  logic [L-1:0][BV-1:0] ld_llr = '0;
  logic [CW-1:0] hd_col = '0;
  logic [L-1:0] hd_bits;
  logic prm_we = 1'b0, prm_is_re = 1'b0;
  logic [TW-1:0] prm_addr = '0;
  logic [NRE-1:0][W-1:0] prm_data = '0;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------------------------- code tables
  // indexed by processing position; row_pos maps a base-matrix row to it
  int e_col [E], e_shift [E], e_layer [E];
  int l_start [MB], l_deg [MB], row_pos [MB];
  int th_m [IMAX * MB][NTH];
  int re_m [IMAX * MB][NRE];

  initial begin
    int e, c, s;
    e = 0;
    for (int r = 0; r < MB; r++) begin
      l_start[r] = e;
      l_deg[r]   = layer_deg(r, MB, DI);
      row_pos[layer_row(r, MB)] = r;
      for (int k = 0; k < l_deg[r]; k++) begin
        int unsigned cu, su;
        code_entry(r, k, MB, KB, DI, L, cu, su);
        e_col[e] = cu; e_shift[e] = su; e_layer[e] = r;
        e++;
      end
    end
    for (int i = 0; i < IMAX; i++)
      for (int r = 0; r < MB; r++) begin
        for (int k = 0; k < NTH; k++) th_m[i*MB+r][k] = default_th(i, k+1, IMAX, W);
        for (int k = 0; k < NRE; k++) re_m[i*MB+r][k] = default_re(i, k+1, IMAX, W);
      end
  end

  // ---------------------------------------------------------------- reference model
  int cw_bits [NB][L];
  int llr [NB][L];
  int mVn [NB][L];
  int mU [E][L];
  int m_iters;
  bit m_success;

  function automatic int sat(int x);
    return (x > VMAX) ? VMAX : (x < -VMAX) ? -VMAX : x;
  endfunction

  function automatic int quant(int a, int t);
    int q;
    q = 0;
    for (int k = 0; k < NTH; k++) if (a > th_m[t][k]) q = k + 1;
    return q;
  endfunction

  task automatic model_decode();
    int vmn [][];
    int hdo [][];
    int min1 [L], min2 [L], idx [L], sgn [L], par [L];
    bit synf, flp;
    vmn = new[DI + 2];
    hdo = new[DI + 2];
    foreach (vmn[k]) begin vmn[k] = new[L]; hdo[k] = new[L]; end
    for (int c = 0; c < NB; c++) for (int j = 0; j < L; j++) mVn[c][j] = llr[c][j];
    m_success = 1'b0;
    m_iters   = IMAX;
    for (int it = 0; it < IMAX; it++) begin
      synf = 0; flp = 0;
      for (int r = 0; r < MB; r++) begin
        int t;
        t = it * MB + r;
        for (int m = 0; m < L; m++) begin
          min1[m] = (1 << QW) - 1; min2[m] = (1 << QW) - 1; idx[m] = 0; sgn[m] = 0; par[m] = 0;
        end
        for (int k = 0; k < l_deg[r]; k++) begin
          int e, c, p;
          e = l_start[r] + k; c = e_col[e]; p = e_shift[e];
          for (int j = 0; j < L; j++) begin
            int u;
            u = (it == 0) ? 0 : mU[e][j];
            vmn[k][j] = sat(mVn[c][j] - u);
            hdo[k][j] = (mVn[c][j] < 0);
          end
          for (int m = 0; m < L; m++) begin
            int j, q;
            j = (m + p) % L;
            q = quant((vmn[k][j] < 0) ? -vmn[k][j] : vmn[k][j], t);
            sgn[m] ^= (vmn[k][j] < 0);
            par[m] ^= hdo[k][j];
            if (q < min1[m]) begin min2[m] = min1[m]; min1[m] = q; idx[m] = k; end
            else if (q < min2[m]) min2[m] = q;
          end
        end
        for (int m = 0; m < L; m++) if (par[m]) synf = 1;
        for (int k = 0; k < l_deg[r]; k++) begin
          int e, c, p;
          e = l_start[r] + k; c = e_col[e]; p = e_shift[e];
          for (int j = 0; j < L; j++) begin
            int m, mag, s, u, vn;
            m   = (j - p + L) % L;
            mag = (idx[m] == k) ? min2[m] : min1[m];
            s   = sgn[m] ^ (vmn[k][j] < 0);
            u   = s ? -re_m[t][mag] : re_m[t][mag];
            vn  = sat(vmn[k][j] + u);
            if ((vn < 0) != hdo[k][j]) flp = 1;
            mU[e][j] = u;
            mVn[c][j] = vn;
          end
        end
      end
      if (!synf && !flp) begin m_success = 1; m_iters = it + 1; break; end
    end
  endtask

  // ---------------------------------------------------------------- stimulus helpers
  function automatic real gauss();
    real s;
    s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom % 65536) / 65536.0;
    return s - 6.0;
  endfunction

  task automatic make_frame(real sigma);
    for (int c = 0; c < KB; c++) for (int j = 0; j < L; j++) cw_bits[c][j] = $urandom % 2;
    for (int r = 0; r < MB; r++)
      for (int m = 0; m < L; m++) begin
        int b;
        b = (r > 0) ? cw_bits[KB + r - 1][m] : 0;
        for (int k = 1; k <= int'(info_deg(row_pos[r], MB, DI)); k++) begin
          int e;
          e = l_start[row_pos[r]] + k;
          b ^= cw_bits[e_col[e]][(m + e_shift[e]) % L];
        end
        cw_bits[KB + r][m] = b;
      end
    for (int c = 0; c < NB; c++)
      for (int j = 0; j < L; j++) begin
        real y, v;
        y = (cw_bits[c][j] ? -1.0 : 1.0) + sigma * gauss();
        v = 8.0 * y;
        llr[c][j] = sat(int'(v));
      end
  endtask

  function automatic bit syndrome_ok(int bits [NB][L]);
    for (int r = 0; r < MB; r++)
      for (int m = 0; m < L; m++) begin
        int p;
        p = 0;
        for (int k = 0; k < l_deg[r]; k++) begin
          int e;
          e = l_start[r] + k;
          p ^= bits[e_col[e]][(m + e_shift[e]) % L];
        end
        if (p) return 0;
      end
    return 1;
  endfunction

  task automatic write_random_params();
    for (int t = 0; t < IMAX * MB; t++) begin
      int v;
      v = 0;
      for (int k = 0; k < NTH; k++) begin
        v = v + 1 + $urandom % 12; if (v > (1 << W) - 1) v = (1 << W) - 1;
        th_m[t][k] = v;
      end
      v = 0;
      for (int k = 0; k < NRE; k++) begin
        v = v + 1 + $urandom % 14; if (v > (1 << W) - 1) v = (1 << W) - 1;
        re_m[t][k] = v;
      end
      @(negedge clk);
      prm_we = 1'b1; prm_is_re = 1'b0; prm_addr = TW'(t);
      for (int k = 0; k < NTH; k++) prm_data[k] = W'(th_m[t][k]);
      prm_data[NRE-1] = '0;
      @(negedge clk);
      prm_is_re = 1'b1;
      for (int k = 0; k < NRE; k++) prm_data[k] = W'(re_m[t][k]);
    end
    @(negedge clk);
    prm_we = 1'b0;
  endtask

  // ---------------------------------------------------------------- coverage
  int cov_stall = 0, cov_overlap = 0, cov_early = 0, cov_maxit = 0, cov_prm = 0;
  always @(posedge clk) if (dut.u_ctrl.rd_valid && dut.u_ctrl.vb_valid) cov_overlap++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic run_frame(real sigma, bit custom);
    longint t0, t1;
    int hd_err;
    make_frame(sigma);
    if (custom) begin write_random_params(); cov_prm++; end
    for (int c = 0; c < NB; c++) begin
      @(negedge clk);
      ld_we = 1'b1; ld_col = CW'(c);
      for (int j = 0; j < L; j++) ld_llr[j] = BV'(llr[c][j]);
    end
    @(negedge clk);
    ld_we = 1'b0;
    model_decode();
    start = 1'b1;
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    t1 = cyc;
    check(iters == IW'(m_iters), $sformatf("iterations %0d, model %0d", iters, m_iters));
    check(success == m_success, $sformatf("success %0d, model %0d", success, m_success));
    // rate: at most one circulant per cycle, and no more than twice that with stalls
    check((t1 - t0) >= longint'(m_iters) * E && (t1 - t0) <= longint'(m_iters) * (2 * E + 40),
          $sformatf("cycle count %0d for %0d iterations of %0d circulants", t1 - t0, m_iters, E));
    if (stall_cycles != 0) cov_stall++;
    if (m_success && m_iters < IMAX) cov_early++;
    if (!m_success) cov_maxit++;
    hd_err = 0;
    for (int c = 0; c < NB; c++) begin
      @(negedge clk);
      hd_col = CW'(c);
      @(negedge clk);
      for (int j = 0; j < L; j++) begin
        if (hd_bits[j] != (mVn[c][j] < 0)) hd_err++;
        cw_bits[c][j] = hd_bits[j];
      end
    end
    check(hd_err == 0, $sformatf("%0d hard decisions differ from the model", hd_err));
    if (success) check(syndrome_ok(cw_bits), "decoder reports success but the word is no codeword");
    $display("frame sigma=%0.2f custom=%0d: iters=%0d success=%0d cycles=%0d stalls=%0d",
             sigma, custom, iters, success, t1 - t0, stall_cycles);
  endtask

  initial begin
    real sig [NFRAMES] = SIGMAS;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    for (int f = 0; f < NFRAMES; f++) run_frame(sig[f], (f == NFRAMES - 1) && (NFRAMES > 1));
    check(cov_stall > 0,   "no hazard stall happened");
    check(cov_overlap > 0, "layers never overlapped");
    check(cov_early > 0,   "no decode terminated early on the syndrome");
    if (NFRAMES > 1) begin
      check(cov_maxit > 0, "no decode ran to the iteration limit");
      check(cov_prm > 0,   "host-written parameters never used");
    end
    $display("coverage: stall_frames=%0d overlap_cycles=%0d early=%0d max_iter=%0d param_load=%0d",
             cov_stall, cov_overlap, cov_early, cov_maxit, cov_prm);
    end_test();
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    end_test();
  end
