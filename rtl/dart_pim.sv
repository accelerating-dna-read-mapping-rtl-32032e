// dart_pim: the PIM module top, a module controller and NC chips.
//
// The module is what the main core sees: it is loaded offline with reference
// segments (indexing writes addressed by chip, bank, crossbar and row), then
// streamed reads tagged with their minimizers (seeding) until `stop_reads`; the
// core then issues linear-iteration commands until the FIFOs are empty and a flush
// command, and collects 512-bit alignment results (read ID, genome location,
// affine distance, traceback). The design's module has 32 chips of 512 banks of
// 512 crossbars (8.4M). The defaults keep the 32 chips but give each 8 banks of
// 8 crossbars (2048 crossbars): elaborating the design costs about 5.5 MB of tool
// memory per crossbar, so the full count would need tens of terabytes, and 2048
// is the largest power-of-two count that stays well inside a 32 GB machine. All
// crossbar-level sizes (FIFO, buffers, cell costs, maxReads) are the design's own. The chip-level RISC-V cores, which take the rare
// minimizers offline, are outside this RTL.
module dart_pim
  import dp_pkg::*;
#(
  parameter int unsigned NCHIP     = 32,      // 32 in the design
  parameter int unsigned NBANK     = 8,       // 512 in the design (scaled, see above)
  parameter int unsigned NXBAR     = 8,       // 512 in the design (scaled, see above)
  parameter int unsigned FIFO_R    = FIFO_ROWS,
  parameter int unsigned LROWS     = LIN_ROWS,
  parameter int unsigned SLOTS     = AFF_SLOTS,
  parameter int unsigned MAX_READS = 25000,
  parameter int unsigned CYC_LIN   = CELL_CYC_LIN,
  parameter int unsigned CYC_AFF   = CELL_CYC_AFF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_valid,
  input  ref_wr_t     wr,
  input  logic        rd_valid,
  input  read_pkt_t   rd,
  output logic        rd_ready,
  output logic        stop_reads,
  input  logic        cmd_valid,
  input  cmd_t        cmd,
  output logic        cmd_ready,
  output logic        cmd_done,
  output logic        all_empty,
  output logic        res_valid,
  output result_t     res,
  input  logic        res_ready,
  output logic [31:0] n_lin_iter,
  output logic [31:0] n_aff_iter,
  output logic [31:0] n_dropped,
  output logic [31:0] n_filtered
);
  logic [NCHIP-1:0]        ch_wr_valid, ch_rd_valid, ch_rd_ready, ch_cmd_ready, ch_done;
  logic [NCHIP-1:0]        ch_res_valid, ch_res_ready;
  ref_wr_t                 ch_wr;
  read_pkt_t               ch_rd;
  logic                    ch_cmd_valid;
  cmd_t                    ch_cmd;
  xstat_t  [NCHIP-1:0]     ch_stat;
  result_t [NCHIP-1:0]     ch_res;
  logic [NCHIP-1:0][31:0]  c_lin, c_aff, c_drop, c_filt;

  pim_controller #(.NC(NCHIP)) u_pim (
    .clk, .rst_n, .wr_valid, .wr, .rd_valid, .rd, .rd_ready, .stop_reads,
    .cmd_valid, .cmd, .cmd_ready, .cmd_done, .all_empty, .res_valid, .res, .res_ready,
    .ch_wr_valid, .ch_wr, .ch_rd_valid, .ch_rd, .ch_rd_ready, .ch_cmd_valid, .ch_cmd,
    .ch_cmd_ready, .ch_done, .ch_stat, .ch_res_valid, .ch_res, .ch_res_ready
  );

  for (genvar c = 0; c < NCHIP; c++) begin : g_chip
    dp_chip #(.NB(NBANK), .NX(NXBAR), .FIFO_R(FIFO_R), .LROWS(LROWS), .SLOTS(SLOTS),
              .MAX_READS(MAX_READS), .CYC_LIN(CYC_LIN), .CYC_AFF(CYC_AFF)) u_chip (
      .clk, .rst_n, .cmd_valid(ch_cmd_valid), .cmd(ch_cmd), .cmd_ready(ch_cmd_ready[c]),
      .done(ch_done[c]), .wr_valid(ch_wr_valid[c]), .wr(ch_wr),
      .rd_valid(ch_rd_valid[c]), .rd(ch_rd), .rd_ready(ch_rd_ready[c]), .stat(ch_stat[c]),
      .res_valid(ch_res_valid[c]), .res(ch_res[c]), .res_ready(ch_res_ready[c]),
      .n_lin_iter(c_lin[c]), .n_aff_iter(c_aff[c]), .n_dropped(c_drop[c]), .n_filtered(c_filt[c])
    );
  end

  always_comb begin
    n_lin_iter = '0; n_aff_iter = '0; n_dropped = '0; n_filtered = '0;
    for (int unsigned c = 0; c < NCHIP; c++) begin
      n_lin_iter = n_lin_iter + c_lin[c];
      n_aff_iter = n_aff_iter + c_aff[c];
      n_dropped  = n_dropped + c_drop[c];
      n_filtered = n_filtered + c_filt[c];
    end
  end
endmodule
