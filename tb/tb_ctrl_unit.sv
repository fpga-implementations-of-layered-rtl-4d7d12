// tb_ctrl_unit: the control unit (L = 8, 16 block columns, 8 layers,
// IMAX = 4) runs against an emulated datapath: layer_done follows cn_last
// by two cycles as in the CN pipeline, and the testbench decides per layer
// whether the syndrome fails and per writeback whether a hard decision
// flips. Checked: reads follow the schedule ROM in order with the first-
// iteration flag; no column is read before its previous writeback has been
// written; the CN controls follow the reads by two cycles; writebacks walk
// each layer in order with matching bank-side column/edge one cycle later;
// the broadcast thresholds and reconstruction values match the iteration
// of their side; decoding stops after the first clean iteration, or after
// IMAX iterations with success low. Stalls and layer overlap must occur.
module tb_ctrl_unit;
  import rcq_pkg::*;
  localparam int unsigned L = 8, NB = 16, MB = 8, DI = 4, IMAX = 4, BC = 4, BV = 8;
  localparam int unsigned W = 7, QW = 3, NTH = 7, NRE = 8;
  localparam int unsigned E = num_edges(MB, DI);
  localparam int unsigned CW = 4, EW = $clog2(E), SW = 3, KW = $clog2(max_deg(DI)), TW = $clog2(IMAX * MB), IW = 3;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done, success;
  logic [IW-1:0] iters;
  logic [31:0] stall_cycles;
  logic prm_we = 0, prm_is_re = 0;
  logic [TW-1:0] prm_addr = '0;
  logic [NRE-1:0][W-1:0] prm_data = '0;
  logic rd_valid, rd_first;
  logic [CW-1:0] rd_col;
  logic [EW-1:0] rd_edge;
  logic [NTH-1:0][W-1:0] th;
  logic cn_valid, cn_last;
  logic [SW-1:0] cn_shift;
  logic layer_done = 0, syn_fail = 0;
  logic wb_valid;
  logic [KW-1:0] wb_k;
  logic [SW-1:0] wb_shift;
  logic vb_valid;
  logic [CW-1:0] vb_col;
  logic [EW-1:0] vb_edge;
  logic [NRE-1:0][W-1:0] re;
  logic flip_any = 0;

  ctrl_unit #(.L(L), .NB(NB), .MB(MB), .DI(DI), .IMAX(IMAX), .BC(BC), .BV(BV)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL @%0d %s", cyc, s); end
  endtask

  int e_col [E], e_shift [E], e_k [E], e_last [E];
  initial begin
    int e;
    e = 0;
    for (int p = 0; p < MB; p++)
      for (int k = 0; k < int'(layer_deg(p, MB, DI)); k++) begin
        int unsigned c, s;
        code_entry(p, k, MB, NB - MB, DI, L, c, s);
        e_col[e] = c; e_shift[e] = s; e_k[e] = k; e_last[e] = int'(k == int'(layer_deg(p, MB, DI)) - 1);
        e++;
      end
  end

  // scenario knobs: syndrome fails in iterations below syn_until; flips in iterations below flip_until
  int syn_until, flip_until;

  // emulated datapath and monitors (sampled just after each rising edge)
  int rd_ptr_m, rd_iter_m, rd_layer_m, wb_ptr_m, wb_iter_m, wb_layer_m;
  longint written_at [NB];
  bit pend [NB];
  logic [2:0] last_d;
  logic [1:0] flip_d;
  int rd_hist_v [4], rd_hist_s [4], th_iter_d, vb_exp_col, vb_exp_edge, vb_exp_v, vb_exp_iter, re_iter_d;
  int cov_stall_seen, cov_overlap;

  task automatic reset_models();
    rd_ptr_m = 0; rd_iter_m = 0; rd_layer_m = 0; wb_ptr_m = 0; wb_iter_m = 0; wb_layer_m = 0;
    for (int c = 0; c < NB; c++) begin pend[c] = 0; written_at[c] = -1; end
  endtask

  // datapath emulation: registered outputs change just after the clock edge
  always @(posedge clk) begin
    #1;
    layer_done = last_d[1];
    syn_fail   = last_d[1] && (wb_iter_m < syn_until);
    flip_any   = flip_d[1];
  end

  // monitors, sampled in the middle of each cycle
  always @(negedge clk) begin
    if (rst_n) begin
      last_d = {last_d[1:0], cn_last & cn_valid};
      flip_d = {flip_d[0], vb_valid && (vb_exp_iter < flip_until)};
      // parameters broadcast one cycle after the request
      if (th_iter_d >= 0)
        for (int k = 0; k < NTH; k++)
          chk(int'(th[k]) == default_th(th_iter_d, k + 1, IMAX, W), "threshold word");
      if (re_iter_d >= 0)
        for (int k = 0; k < NRE; k++)
          chk(int'(re[k]) == default_re(re_iter_d, k + 1, IMAX, W), "reconstruction word");
      th_iter_d = -1; re_iter_d = -1;
      // bank-side writeback one cycle after the CN return
      chk(vb_valid == (vb_exp_v != 0), "vb_valid follows wb_valid");
      if (vb_valid) begin
        chk(int'(vb_col) == vb_exp_col && int'(vb_edge) == vb_exp_edge, "bank writeback column/edge");
        written_at[vb_col] = cyc + 1;   // the bank writes V_n in the next cycle
        pend[vb_col] = 0;
        re_iter_d = vb_exp_iter;
      end
      vb_exp_v = int'(wb_valid);
      if (wb_valid) begin
        chk(int'(wb_k) == e_k[wb_ptr_m] && int'(wb_shift) == e_shift[wb_ptr_m], "writeback order");
        vb_exp_col = e_col[wb_ptr_m]; vb_exp_edge = wb_ptr_m; vb_exp_iter = wb_iter_m;
        if (e_last[wb_ptr_m] != 0) begin
          wb_layer_m++;
          if (wb_layer_m == MB) begin wb_layer_m = 0; wb_iter_m++; end
        end
        wb_ptr_m = (wb_ptr_m + 1) % E;
      end
      // CN controls two cycles after the read
      chk(cn_valid == (rd_hist_v[1] != 0), "cn_valid alignment");
      if (cn_valid) chk(int'(cn_shift) == rd_hist_s[1], "cn_shift alignment");
      rd_hist_v[1] = rd_hist_v[0]; rd_hist_s[1] = rd_hist_s[0];
      rd_hist_v[0] = int'(rd_valid); rd_hist_s[0] = e_shift[rd_ptr_m];
      if (rd_valid) begin
        chk(int'(rd_col) == e_col[rd_ptr_m] && int'(rd_edge) == rd_ptr_m, "read order");
        chk(rd_first == (rd_iter_m == 0), "first-iteration flag");
        chk(!pend[rd_col] && (written_at[rd_col] < 0 || cyc > written_at[rd_col]),
            $sformatf("column %0d read before its writeback landed", rd_col));
        if (wb_valid || vb_valid) cov_overlap++;
        pend[rd_col] = 1;
        th_iter_d = rd_iter_m;
        if (e_last[rd_ptr_m] != 0) begin
          rd_layer_m++;
          if (rd_layer_m == MB) begin rd_layer_m = 0; rd_iter_m++; end
        end
        rd_ptr_m = (rd_ptr_m + 1) % E;
      end
    end
  end

  task automatic run(int su, int fu, int exp_iters, bit exp_success);
    longint t0;
    syn_until = su; flip_until = fu;
    reset_models();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    chk(busy, "busy after start");
    t0 = cyc;
    while (!done) @(negedge clk);
    chk(int'(iters) == exp_iters, $sformatf("iterations %0d expected %0d", iters, exp_iters));
    chk(success == exp_success, "success flag");
    chk(rd_iter_m == exp_iters && wb_iter_m == exp_iters, "whole iterations read and written back");
    if (stall_cycles != 0) cov_stall_seen++;
    $display("run syn<%0d flip<%0d: iters=%0d success=%0d cycles=%0d stalls=%0d",
             su, fu, iters, success, cyc - t0, stall_cycles);
    @(negedge clk);
    chk(!busy, "idle after done");
  endtask

  initial begin
    cov_stall_seen = 0; cov_overlap = 0;
    th_iter_d = -1; re_iter_d = -1; vb_exp_v = 0; vb_exp_iter = 0;
    rd_hist_v = '{default: 0}; rd_hist_s = '{default: 0};
    last_d = '0; flip_d = '0;
    reset_models();
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(2, 0, 3, 1);        // syndrome clean from the third iteration
    run(0, 1, 2, 1);        // a flip in the first iteration only
    run(0, 0, 1, 1);        // clean at once
    run(99, 0, IMAX, 0);    // never clean
    run(0, 99, IMAX, 0);    // hard decisions keep changing
    chk(cov_stall_seen > 0, "no stall happened");
    chk(cov_overlap > 0, "reads never overlapped writebacks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
