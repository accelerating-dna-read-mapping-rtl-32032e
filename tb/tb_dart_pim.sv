// tb_dart_pim: end-to-end test of the PIM module at reduced sizes (8 crossbars of
// 8 linear rows, a 6-read FIFO, 2 affine instances, maxReads 8, cell costs of 2
// and 3 clocks) so that every mechanism occurs: the stop signal from a full FIFO,
// seeding resumed after filtering, a minimizer held by two crossbars, a read no
// crossbar holds, filtered reads, the maxReads bound, affine iterations on a full
// buffer and the final flush. Each mechanism is counted and must occur.
module tb_dart_pim;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  localparam int NCHIP_T = 2, NBANK_T = 2, NXBAR_T = 2, LROWS_T = 8, SLOTS_T = 2;
  localparam int FIFO_R_T = 2, MAXR_T = 8, N_READS_T = 60, HOT_T = 1;
  localparam bit CHECK_MECH = 1;
  localparam int WATCHDOG_T = 2000000;

`include "tb_dart_pim_body.svh"

  initial begin
    @(run_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  dart_pim #(.NCHIP(NCHIP_T), .NBANK(NBANK_T), .NXBAR(NXBAR_T), .FIFO_R(FIFO_R_T), .LROWS(LROWS_T),
             .SLOTS(SLOTS_T), .MAX_READS(MAXR_T), .CYC_LIN(2), .CYC_AFF(3)) dut (
    .clk, .rst_n, .wr_valid, .wr, .rd_valid, .rd, .rd_ready, .stop_reads, .cmd_valid, .cmd,
    .cmd_ready, .cmd_done, .all_empty, .res_valid, .res, .res_ready, .n_lin_iter, .n_aff_iter,
    .n_dropped, .n_filtered);
endmodule
