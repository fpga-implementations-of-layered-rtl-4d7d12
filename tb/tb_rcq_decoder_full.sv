// tb_rcq_decoder_full: end-to-end test of the decoder at its default size
// (L = 64, 256 block columns of which 128 carry information, 128 layers,
// 4-bit messages, 8-bit AP-LLRs, 16 iterations), the decoder instantiated
// without parameter overrides. Three frames: two at moderate noise with
// the default RCQ parameters and one very noisy frame decoded with
// host-written parameters. See tb_decoder_body.svh.
module tb_rcq_decoder_full;
  localparam int unsigned L    = rcq_pkg::L_DEF;
  localparam int unsigned NB   = rcq_pkg::NB_DEF;
  localparam int unsigned MB   = rcq_pkg::MB_DEF;
  localparam int unsigned DI   = rcq_pkg::DI_DEF;
  localparam int unsigned IMAX = rcq_pkg::IMAX_DEF;
  localparam int unsigned BC   = rcq_pkg::BC_DEF;
  localparam int unsigned BV   = rcq_pkg::BV_DEF;
  localparam int unsigned NFRAMES = 3;
  localparam real SIGMAS [NFRAMES] = '{0.5, 0.65, 2.0};
  localparam int unsigned WATCHDOG = 2000000;

  `include "tb_decoder_body.svh"

  // prints the result line and stops; called at the end and by the watchdog
  task automatic end_test();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  rcq_decoder_top dut (
    .clk, .rst_n, .start, .busy, .done, .success, .iters, .stall_cycles,
    .ld_we, .ld_col, .ld_llr, .hd_col, .hd_bits,
    .prm_we, .prm_is_re, .prm_addr, .prm_data);
endmodule
