// tb_dart_pim_xbar: one complete operation of the PIM module with full-size
// crossbars (every crossbar-level parameter at its default: 32 linear rows, a
// 480-read FIFO, 8 affine instances, maxReads 25k, cell costs of 130 and 660
// clocks) but only 2 chips x 2 banks x 2 crossbars, so that it simulates in about
// a minute. Indexes every crossbar, streams
// a short read set, runs linear iterations until the FIFOs are empty (the buffer
// of the busiest crossbar fills once, starting an affine iteration) and flushes,
// checking every result against the reference models. The mechanisms that need
// hundreds of reads (full FIFO, maxReads) are exercised by tb_dart_pim.
module tb_dart_pim_xbar;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  localparam int NCHIP_T = 2, NBANK_T = 2, NXBAR_T = 2, LROWS_T = LIN_ROWS;
  localparam int MAXR_T = 25000, N_READS_T = 24, HOT_T = 1;
  localparam bit CHECK_MECH = 0;
  localparam int WATCHDOG_T = 20000000;

`include "tb_dart_pim_body.svh"

  initial begin
    @(run_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  dart_pim #(.NCHIP(NCHIP_T), .NBANK(NBANK_T), .NXBAR(NXBAR_T)) dut (
    .clk, .rst_n, .wr_valid, .wr, .rd_valid, .rd, .rd_ready, .stop_reads, .cmd_valid, .cmd,
    .cmd_ready, .cmd_done, .all_empty, .res_valid, .res, .res_ready, .n_lin_iter, .n_aff_iter,
    .n_dropped, .n_filtered);
endmodule
