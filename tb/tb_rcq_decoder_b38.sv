// tb_rcq_decoder_b38: end-to-end test of the decoder built for 3-bit messages and
// 8-bit AP-LLRs, RCQ(3,8), one of the width pairs the decoder family
// is evaluated at. Reduced size as in tb_rcq_decoder_top (L = 8, 16 block
// columns, 8 layers, 8 iterations); same frames, same bit-exact reference
// model and the same mechanism coverage. See tb_decoder_body.svh.
module tb_rcq_decoder_b38;
  localparam int unsigned L = 8, NB = 16, MB = 8, DI = 4, IMAX = 8, BC = 3, BV = 8;
  localparam int unsigned NFRAMES = 8;
  localparam real SIGMAS [NFRAMES] = '{0.2, 0.5, 0.6, 0.7, 0.8, 1.5, 2.5, 0.6};
  localparam int unsigned WATCHDOG = 200000;

  `include "tb_decoder_body.svh"

  // prints the result line and stops; called at the end and by the watchdog
  task automatic end_test();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  rcq_decoder_top #(.L(L), .NB(NB), .MB(MB), .DI(DI), .IMAX(IMAX), .BC(BC), .BV(BV)) dut (
    .clk, .rst_n, .start, .busy, .done, .success, .iters, .stall_cycles,
    .ld_we, .ld_col, .ld_llr, .hd_col, .hd_bits,
    .prm_we, .prm_is_re, .prm_addr, .prm_data);
endmodule
