// pim_controller: the controller of the PIM module, between the main core and the
// memory chips.
//
// The main core talks to the module through this block only:
//   - indexing writes are decoded to the addressed chip, and each chip's minimizer
//     range is learnt from them, so that a seeding read is sent only to chips that
//     may hold its minimizer (a read matching no chip is accepted and dropped);
//   - while any crossbar's reads FIFO is full, `stop_reads` is raised and no read is
//     accepted: this is the signal that ends a seeding phase;
//   - a command (linear iteration or flush) is offered to every chip in the same
//     clock when all chips are idle, and `cmd_done` pulses once every chip has
//     reported completion;
//   - results from the chips are selected round robin onto the 512-bit result port;
//   - `all_empty` tells the core that no reads wait in any FIFO and no affine buffer
//     holds work, i.e. the stream is fully processed.
// The design gives the controller's role (it holds the minimizers of all its
// descendants and passes on the stop signal); the range filter, the command
// handshake and the result arbitration are this design's choices.
module pim_controller
  import dp_pkg::*;
#(
  parameter int unsigned NC = 32           // chips per module
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // main core side
  input  logic                 wr_valid,
  input  ref_wr_t              wr,
  input  logic                 rd_valid,
  input  read_pkt_t            rd,
  output logic                 rd_ready,
  output logic                 stop_reads,
  input  logic                 cmd_valid,
  input  cmd_t                 cmd,
  output logic                 cmd_ready,
  output logic                 cmd_done,
  output logic                 all_empty,
  output logic                 res_valid,
  output result_t              res,
  input  logic                 res_ready,
  // chip side
  output logic [NC-1:0]        ch_wr_valid,
  output ref_wr_t              ch_wr,
  output logic [NC-1:0]        ch_rd_valid,
  output read_pkt_t            ch_rd,
  input  logic [NC-1:0]        ch_rd_ready,
  output logic                 ch_cmd_valid,
  output cmd_t                 ch_cmd,
  input  logic [NC-1:0]        ch_cmd_ready,
  input  logic [NC-1:0]        ch_done,
  input  xstat_t [NC-1:0]      ch_stat,
  input  logic [NC-1:0]        ch_res_valid,
  input  result_t [NC-1:0]     ch_res,
  output logic [NC-1:0]        ch_res_ready
);
  localparam int unsigned IW = (NC > 1) ? $clog2(NC) : 1;

  // ---------------- indexing ----------------
  logic [NC-1:0]    has;
  logic [MIN_W-1:0] lo [NC];
  logic [MIN_W-1:0] hi [NC];

  always_comb begin
    ch_wr_valid = '0;
    if (wr_valid && 32'(wr.chip) < NC) ch_wr_valid[IW'(wr.chip)] = 1'b1;
  end
  assign ch_wr = wr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      has <= '0;
      for (int unsigned c = 0; c < NC; c++) begin
        lo[c] <= '0;
        hi[c] <= '0;
      end
    end else if (wr_valid && 32'(wr.chip) < NC) begin
      has[IW'(wr.chip)] <= 1'b1;
      if (!has[IW'(wr.chip)] || wr.minimizer < lo[IW'(wr.chip)]) lo[IW'(wr.chip)] <= wr.minimizer;
      if (!has[IW'(wr.chip)] || wr.minimizer > hi[IW'(wr.chip)]) hi[IW'(wr.chip)] <= wr.minimizer;
    end
  end

  // ---------------- status ----------------
  xstat_t any;
  always_comb begin
    any = '0;
    for (int unsigned c = 0; c < NC; c++) any = any | ch_stat[c];
  end
  assign stop_reads = any.fifo_full;
  assign all_empty  = !any.fifo_nonempty && !any.aff_nonempty && !any.busy;

  // ---------------- seeding reads ----------------
  logic [NC-1:0] match;
  logic          all_ok;
  always_comb begin
    for (int unsigned c = 0; c < NC; c++)
      match[c] = has[c] && (rd.minimizer >= lo[c]) && (rd.minimizer <= hi[c]);
    all_ok = &(~match | ch_rd_ready) && !stop_reads;
  end
  assign ch_rd_valid = (rd_valid && all_ok) ? match : '0;
  assign ch_rd       = rd;
  assign rd_ready    = all_ok;

  // ---------------- commands ----------------
  logic          waiting;
  logic [NC-1:0] got;

  assign cmd_ready    = !waiting && (&ch_cmd_ready);
  assign ch_cmd_valid = cmd_valid && cmd_ready;
  assign ch_cmd       = cmd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waiting  <= 1'b0;
      got      <= '0;
      cmd_done <= 1'b0;
    end else begin
      cmd_done <= 1'b0;
      if (ch_cmd_valid) begin
        waiting <= 1'b1;
        got     <= '0;
      end else if (waiting) begin
        if (&(got | ch_done)) begin
          waiting  <= 1'b0;
          cmd_done <= 1'b1;
        end
        got <= got | ch_done;
      end
    end
  end

  // ---------------- results ----------------
  logic [NC-1:0] grant;
  logic [IW-1:0] gidx;
  logic          gany;
  rr_arbiter #(.N(NC)) u_arb (
    .clk, .rst_n, .req(ch_res_valid), .advance(res_ready), .grant(grant), .idx(gidx), .any(gany)
  );
  assign res_valid    = gany;
  assign res          = ch_res[gidx];
  assign ch_res_ready = res_ready ? grant : '0;

  a_stop: assert property (@(posedge clk) disable iff (!rst_n) stop_reads |-> !rd_ready);
endmodule
