// dp_chip: one memory chip, a chip controller and NB banks wired together.
//
// Structural only: the chip controller sequences all crossbars of all banks with
// one strobe stream and routes writes, reads and results. The chip's RISC-V cores
// and their cache are not part of this RTL. Interface as the chip controller's
// upper side plus event counters summed over the chip. The small defaults only
// serve a standalone build; the top sets the real bank and crossbar counts.
module dp_chip
  import dp_pkg::*;
#(
  parameter int unsigned NB        = 2,
  parameter int unsigned NX        = 2,
  parameter int unsigned FIFO_R    = FIFO_ROWS,
  parameter int unsigned LROWS     = LIN_ROWS,
  parameter int unsigned SLOTS     = AFF_SLOTS,
  parameter int unsigned MAX_READS = 25000,
  parameter int unsigned CYC_LIN   = CELL_CYC_LIN,
  parameter int unsigned CYC_AFF   = CELL_CYC_AFF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  cmd_t        cmd,
  output logic        cmd_ready,
  output logic        done,
  input  logic        wr_valid,
  input  ref_wr_t     wr,
  input  logic        rd_valid,
  input  read_pkt_t   rd,
  output logic        rd_ready,
  output xstat_t      stat,
  output logic        res_valid,
  output result_t     res,
  input  logic        res_ready,
  output logic [31:0] n_lin_iter,
  output logic [31:0] n_aff_iter,
  output logic [31:0] n_dropped,
  output logic [31:0] n_filtered
);
  logic [NB-1:0]        bk_wr_valid, bk_rd_valid, bk_rd_ready, bk_res_valid, bk_res_ready;
  ref_wr_t              bk_wr;
  read_pkt_t            bk_rd;
  seq_t                 bk_seq;
  xstat_t  [NB-1:0]     bk_stat;
  result_t [NB-1:0]     bk_res;
  logic [NB-1:0][31:0]  bk_drop, bk_filt;

  chip_controller #(.NB(NB), .CYC_LIN(CYC_LIN), .CYC_AFF(CYC_AFF)) u_ctl (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .done, .wr_valid, .wr, .rd_valid, .rd,
    .rd_ready, .stat, .res_valid, .res, .res_ready,
    .bk_wr_valid, .bk_wr, .bk_rd_valid, .bk_rd, .bk_rd_ready, .bk_seq, .bk_stat,
    .bk_res_valid, .bk_res, .bk_res_ready, .n_lin_iter, .n_aff_iter
  );

  for (genvar b = 0; b < NB; b++) begin : g_bank
    dp_bank #(.NX(NX), .FIFO_R(FIFO_R), .LROWS(LROWS), .SLOTS(SLOTS), .MAX_READS(MAX_READS)) u_bank (
      .clk, .rst_n, .wr_valid(bk_wr_valid[b]), .wr(bk_wr),
      .rd_valid(bk_rd_valid[b]), .rd(bk_rd), .rd_ready(bk_rd_ready[b]),
      .seq(bk_seq), .stat(bk_stat[b]),
      .res_valid(bk_res_valid[b]), .res(bk_res[b]), .res_ready(bk_res_ready[b]),
      .n_dropped(bk_drop[b]), .n_filtered(bk_filt[b])
    );
  end

  always_comb begin
    n_dropped  = '0;
    n_filtered = '0;
    for (int unsigned b = 0; b < NB; b++) begin
      n_dropped  = n_dropped + bk_drop[b];
      n_filtered = n_filtered + bk_filt[b];
    end
  end
endmodule
