// chip_controller: the controller of one memory chip, and the sequencer of its WF
// iterations.
//
// Every crossbar of a chip runs the same operation sequence, so one controller per
// chip issues it to all banks and crossbars at once. On a command from the module
// controller this block runs
//   linear iteration: `lin_load` (step 2), then one `cell_stb` per WF cell (i, j) for
//     i = 0..RL-1, j = 0..2eth, spaced CYC_LIN clocks apart (130, the MAGIC NOR cost
//     of a 3-bit cell), then `lin_finish` (steps 4-5) and a wait until no crossbar
//     is busy. If any crossbar's affine buffer is then full, an affine iteration
//     follows at once;
//   affine iteration: `aff_load`, one `cell_stb` with `cell_aff` per cell spaced
//     CYC_AFF clocks apart (660), then `tb_start` (traceback and step 7) and a wait
//     until every result has left;
//   flush: an affine iteration in which partly filled buffers also take part.
// `done` pulses when a command is complete. The controller also routes indexing
// writes to the addressed bank, and routes seeding reads to the banks whose
// minimizer range (the smallest and largest minimizer written into the bank during
// indexing, learnt from the writes) contains the read's minimizer; it ORs bank
// status upward and selects bank results round robin. The per-cell cycle costs are
// the design's; the range filter, the strobe protocol and the settle waits are
// this design's choices.
module chip_controller
  import dp_pkg::*;
#(
  parameter int unsigned NB      = 512,           // banks per chip
  parameter int unsigned CYC_LIN = CELL_CYC_LIN,
  parameter int unsigned CYC_AFF = CELL_CYC_AFF,
  parameter int unsigned NROWS   = RL,            // read bases per matrix
  parameter int unsigned NCELLS  = BAND           // band cells per read base
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // from the module controller
  input  logic                 cmd_valid,
  input  cmd_t                 cmd,
  output logic                 cmd_ready,
  output logic                 done,
  input  logic                 wr_valid,
  input  ref_wr_t              wr,
  input  logic                 rd_valid,
  input  read_pkt_t            rd,
  output logic                 rd_ready,
  output xstat_t               stat,
  output logic                 res_valid,
  output result_t              res,
  input  logic                 res_ready,
  // to the banks
  output logic [NB-1:0]        bk_wr_valid,
  output ref_wr_t              bk_wr,
  output logic [NB-1:0]        bk_rd_valid,
  output read_pkt_t            bk_rd,
  input  logic [NB-1:0]        bk_rd_ready,
  output seq_t                 bk_seq,
  input  xstat_t [NB-1:0]      bk_stat,
  input  logic [NB-1:0]        bk_res_valid,
  input  result_t [NB-1:0]     bk_res,
  output logic [NB-1:0]        bk_res_ready,
  // iteration counters for observation
  output logic [31:0]          n_lin_iter,
  output logic [31:0]          n_aff_iter
);
  localparam int unsigned IW = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned CW = $clog2(((CYC_AFF > CYC_LIN) ? CYC_AFF : CYC_LIN) + 1);

  // ---------------- indexing write decode and range learning ----------------
  logic [NB-1:0]            has;
  logic [MIN_W-1:0]         lo [NB];
  logic [MIN_W-1:0]         hi [NB];

  always_comb begin
    bk_wr_valid = '0;
    if (wr_valid && 32'(wr.bank) < NB) bk_wr_valid[IW'(wr.bank)] = 1'b1;
  end
  assign bk_wr = wr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      has <= '0;
      for (int unsigned b = 0; b < NB; b++) begin
        lo[b] <= '0;
        hi[b] <= '0;
      end
    end else if (wr_valid && 32'(wr.bank) < NB) begin
      has[IW'(wr.bank)] <= 1'b1;
      if (!has[IW'(wr.bank)] || wr.minimizer < lo[IW'(wr.bank)]) lo[IW'(wr.bank)] <= wr.minimizer;
      if (!has[IW'(wr.bank)] || wr.minimizer > hi[IW'(wr.bank)]) hi[IW'(wr.bank)] <= wr.minimizer;
    end
  end

  // ---------------- read routing by minimizer range ----------------
  logic [NB-1:0] match;
  logic          all_ok;
  always_comb begin
    for (int unsigned b = 0; b < NB; b++)
      match[b] = has[b] && (rd.minimizer >= lo[b]) && (rd.minimizer <= hi[b]);
    all_ok = &(~match | bk_rd_ready);
  end
  assign bk_rd_valid = (rd_valid && all_ok) ? match : '0;
  assign bk_rd       = rd;
  assign rd_ready    = all_ok;

  // ---------------- status and results ----------------
  always_comb begin
    stat = '0;
    for (int unsigned b = 0; b < NB; b++) stat = stat | bk_stat[b];
  end

  logic [NB-1:0] grant;
  logic [IW-1:0] gidx;
  logic          gany;
  rr_arbiter #(.N(NB)) u_arb (
    .clk, .rst_n, .req(bk_res_valid), .advance(res_ready), .grant(grant), .idx(gidx), .any(gany)
  );
  assign res_valid    = gany;
  assign res          = bk_res[gidx];
  assign bk_res_ready = res_ready ? grant : '0;

  // ---------------- WF iteration sequencer ----------------
  typedef enum logic [3:0] {
    S_IDLE, S_LLOAD, S_LCELL, S_LFIN, S_LWAIT, S_ALOAD, S_ACELL, S_TB, S_TWAIT, S_DONE
  } sstate_t;

  sstate_t    st;
  logic [CW-1:0] cnt;
  logic [7:0] ci;
  logic [3:0] cj;
  logic       flush;
  logic [1:0] settle;
  logic       last_cell, cell_fire;

  assign cmd_ready = (st == S_IDLE);
  assign last_cell = (32'(ci) == NROWS - 1) && (32'(cj) == NCELLS - 1);
  assign cell_fire = (st == S_LCELL && 32'(cnt) == CYC_LIN - 1) ||
                     (st == S_ACELL && 32'(cnt) == CYC_AFF - 1);

  always_comb begin
    bk_seq            = '0;
    bk_seq.lin_load   = (st == S_LLOAD);
    bk_seq.cell_stb   = cell_fire;
    bk_seq.cell_aff   = (st == S_ACELL);
    bk_seq.cell_i     = ci;
    bk_seq.cell_j     = cj;
    bk_seq.lin_finish = (st == S_LFIN);
    bk_seq.aff_load   = (st == S_ALOAD);
    bk_seq.aff_flush  = flush;
    bk_seq.tb_start   = (st == S_TB);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cnt <= '0; ci <= '0; cj <= '0; flush <= 1'b0; settle <= '0;
      done <= 1'b0; n_lin_iter <= '0; n_aff_iter <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: begin
          if (cmd_valid && cmd == CMD_LIN_ITER) begin
            st <= S_LLOAD;
          end else if (cmd_valid && cmd == CMD_FLUSH) begin
            flush <= 1'b1;
            st    <= S_ALOAD;
          end else if (cmd_valid) begin
            st <= S_DONE;
          end
        end
        S_LLOAD: begin
          st <= S_LCELL; cnt <= '0; ci <= '0; cj <= '0;
          n_lin_iter <= n_lin_iter + 1;
        end
        S_LCELL, S_ACELL: begin
          if (cell_fire) begin
            cnt <= '0;
            if (last_cell) begin
              ci <= '0; cj <= '0;
              st <= (st == S_LCELL) ? S_LFIN : S_TB;
            end else if (32'(cj) == NCELLS - 1) begin
              cj <= '0; ci <= ci + 1'b1;
            end else begin
              cj <= cj + 1'b1;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_LFIN: begin
          st <= S_LWAIT; settle <= 2'd2;
        end
        S_LWAIT: begin
          if (settle != 0) settle <= settle - 1'b1;
          else if (!stat.busy) begin
            if (stat.aff_full) begin
              flush <= 1'b0;
              st    <= S_ALOAD;
            end else begin
              st <= S_DONE;
            end
          end
        end
        S_ALOAD: begin
          if (stat.aff_full || (flush && stat.aff_nonempty)) begin
            st <= S_ACELL; cnt <= '0; ci <= '0; cj <= '0;
            n_aff_iter <= n_aff_iter + 1;
          end else begin
            st <= S_DONE;
          end
        end
        S_TB: begin
          st <= S_TWAIT; settle <= 2'd2;
        end
        S_TWAIT: begin
          if (settle != 0) settle <= settle - 1'b1;
          else if (!stat.busy) st <= S_DONE;
        end
        default: begin  // S_DONE
          done  <= 1'b1;
          flush <= 1'b0;
          st    <= S_IDLE;
        end
      endcase
    end
  end

  // a strobe names a cell inside the band
  a_cell: assert property (@(posedge clk) disable iff (!rst_n)
    bk_seq.cell_stb |-> (32'(bk_seq.cell_i) < NROWS && 32'(bk_seq.cell_j) < NCELLS));
endmodule
