// dp_bank: one bank, a bank controller and NX crossbars wired together.
//
// Structural only: the bank controller routes indexing writes and reads to the
// crossbars, fans out the chip's sequencing strobes and multiplexes results.
// Interface as bank_controller's upper side.
module dp_bank
  import dp_pkg::*;
#(
  parameter int unsigned NX        = 8,
  parameter int unsigned FIFO_R    = FIFO_ROWS,
  parameter int unsigned LROWS     = LIN_ROWS,
  parameter int unsigned SLOTS     = AFF_SLOTS,
  parameter int unsigned MAX_READS = 25000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr_valid,
  input  ref_wr_t    wr,
  input  logic       rd_valid,
  input  read_pkt_t  rd,
  output logic       rd_ready,
  input  seq_t       seq,
  output xstat_t     stat,
  output logic       res_valid,
  output result_t    res,
  input  logic       res_ready,
  output logic [31:0] n_dropped,
  output logic [31:0] n_filtered
);
  logic [NX-1:0]            xb_wr_valid, xb_indexed, xb_rd_valid, xb_rd_ready;
  logic [NX-1:0]            xb_res_valid, xb_res_ready;
  logic [NX-1:0][MIN_W-1:0] xb_min;
  ref_wr_t                  xb_wr;
  read_pkt_t                xb_rd;
  seq_t                     xb_seq;
  xstat_t  [NX-1:0]         xb_stat;
  result_t [NX-1:0]         xb_res;
  logic [NX-1:0][31:0]      xb_drop, xb_filt;

  bank_controller #(.NX(NX)) u_ctl (
    .clk, .rst_n, .wr_valid, .wr, .rd_valid, .rd, .rd_ready, .seq_in(seq), .stat,
    .res_valid, .res, .res_ready,
    .xb_wr_valid, .xb_wr, .xb_min, .xb_indexed, .xb_rd_valid, .xb_rd, .xb_rd_ready,
    .xb_seq, .xb_stat, .xb_res_valid, .xb_res, .xb_res_ready
  );

  for (genvar x = 0; x < NX; x++) begin : g_xb
    dp_crossbar #(.FIFO_R(FIFO_R), .LROWS(LROWS), .SLOTS(SLOTS), .MAX_READS(MAX_READS)) u_xb (
      .clk, .rst_n,
      .wr_valid(xb_wr_valid[x]), .wr(xb_wr), .my_min(xb_min[x]), .indexed(xb_indexed[x]),
      .rd_valid(xb_rd_valid[x]), .rd(xb_rd), .rd_ready(xb_rd_ready[x]),
      .seq(xb_seq), .stat(xb_stat[x]),
      .res_valid(xb_res_valid[x]), .res(xb_res[x]), .res_ready(xb_res_ready[x]),
      .n_dropped(xb_drop[x]), .n_filtered(xb_filt[x])
    );
  end

  always_comb begin
    n_dropped  = '0;
    n_filtered = '0;
    for (int unsigned x = 0; x < NX; x++) begin
      n_dropped  = n_dropped + xb_drop[x];
      n_filtered = n_filtered + xb_filt[x];
    end
  end
endmodule
