// dp_crossbar: one 256 x 1024 crossbar of the DP-memory with its crossbar controller.
//
// A crossbar owns one reference minimizer and runs every online read-mapping stage
// for it without moving reference data out:
//   step 0  indexing writes put reference segments (300 bases, the minimizer at
//           base MINPOS = 144) into the 32 rows of the linear WF buffer;
//   step 1  seeding appends reads carrying this minimizer to the reads FIFO;
//   step 2  `lin_load` copies the FIFO head into every linear row; the row works on
//           the 162-base window starting at off = RL-K-pos, where pos is the
//           minimizer's position in the read, so that the window's band centre is
//           the read's placement implied by the shared minimizer;
//   step 3  `cell_stb` strobes compute the banded linear WF in all rows at once;
//   step 4  `lin_finish` scans the rows serially for the smallest distance;
//   step 5  the read and the aligned 162-base window of the best row are copied into
//           a free instance of the affine WF buffer (8 instances);
//   step 6  when told by `aff_load` (buffer full, or flushing) the affine WF runs in
//           all filled instances under `cell_stb` with `cell_aff` set;
//   step 7  `tb_start` walks each instance's directions and sends one 512-bit
//           result word (read ID, location, distance, traceback) per instance.
// All sequencing strobes come from the chip controller; this controller only
// applies them and runs steps 2, 4, 5 and 7 locally. A read whose best linear
// distance is saturated (above eth) is dropped here: the design discards "high"
// distances without a number, and this threshold is this design's choice. At most
// MAX_READS reads are accepted into the FIFO over the crossbar's lifetime; later
// ones are accepted and discarded (the maxReads bound). The reported location is
// the segment's genome location plus off + eth, the read start on the band centre.
//
// Storage is written as arrays of typed fields rather than as the physical 1024-bit
// rows, and the WF cells are CMOS logic standing in for MAGIC NOR sequences; the
// affine instance's aligned reference window holds 162 bases where the in-row
// layout shows 312 bits (156 bases).
//
// Interface: indexing write `wr_valid/wr` (always accepted), read stream
// `rd_valid/rd/rd_ready`, sequencing strobes `seq`, status `stat`, result stream
// `res_valid/res/res_ready`. `my_min` and `indexed` let the bank route reads.
module dp_crossbar
  import dp_pkg::*;
#(
  parameter int unsigned FIFO_R    = FIFO_ROWS,
  parameter int unsigned LROWS     = LIN_ROWS,
  parameter int unsigned SLOTS     = AFF_SLOTS,
  parameter int unsigned MAX_READS = 25000
) (
  input  logic             clk,
  input  logic             rst_n,
  // indexing
  input  logic             wr_valid,
  input  ref_wr_t          wr,
  output logic [MIN_W-1:0] my_min,
  output logic             indexed,
  // seeding
  input  logic             rd_valid,
  input  read_pkt_t        rd,
  output logic             rd_ready,
  // sequencing
  input  seq_t             seq,
  output xstat_t           stat,
  // results
  output logic             res_valid,
  output result_t          res,
  input  logic             res_ready,
  // event counters for observation
  output logic [31:0]      n_dropped,
  output logic [31:0]      n_filtered
);
  localparam int unsigned LIW = (LROWS > 1) ? $clog2(LROWS) : 1;
  localparam int unsigned SW  = $clog2(SLOTS + 1);

  // ---------------- linear WF buffer storage (step 0) ----------------
  base_t [REF_BASES-1:0] lin_ref [LROWS];
  logic  [PL_W-1:0]      lin_pl  [LROWS];
  logic  [LROWS-1:0]     lin_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lin_valid <= '0;
      my_min    <= '0;
    end else if (wr_valid && 32'(wr.row) < LROWS) begin
      lin_valid[wr.row] <= 1'b1;
      my_min            <= wr.minimizer;
    end
  end
  always_ff @(posedge clk) begin
    if (wr_valid && 32'(wr.row) < LROWS) begin
      lin_ref[wr.row] <= wr.seg;
      lin_pl[wr.row]  <= wr.pl;
    end
  end
  assign indexed = |lin_valid;

  // ---------------- reads FIFO (step 1) ----------------
  fifo_entry_t fifo_din, fifo_dout;
  logic fifo_push, fifo_pop, fifo_full, fifo_empty;
  logic [$clog2(FIFO_R*READS_PER_ROW+1)-1:0] fifo_count;
  logic [31:0] n_accepted;
  logic        over_limit;

  assign over_limit = (n_accepted >= MAX_READS);
  assign rd_ready   = over_limit || !fifo_full;
  assign fifo_push  = rd_valid && rd_ready && !over_limit;
  assign fifo_din   = '{id: rd.id, pos: rd.pos, bases: rd.bases};

  reads_fifo #(.ROWS(FIFO_R), .PER_ROW(READS_PER_ROW)) u_fifo (
    .clk, .rst_n, .push(fifo_push), .din(fifo_din), .pop(fifo_pop), .dout(fifo_dout),
    .full(fifo_full), .empty(fifo_empty), .count(fifo_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_accepted <= '0;
      n_dropped  <= '0;
    end else if (rd_valid && rd_ready) begin
      if (over_limit) n_dropped  <= n_dropped + 1;
      else            n_accepted <= n_accepted + 1;
    end
  end

  // ---------------- current read (step 2) ----------------
  typedef enum logic [2:0] {C_IDLE, C_MIN, C_TB_RUN, C_TB_OUT} cstate_t;
  cstate_t cst;
  logic    ctl_done_lin;
  fifo_entry_t cur;
  logic [8:0]  cur_off;
  logic        lin_active;

  assign fifo_pop = seq.lin_load && !fifo_empty && indexed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur        <= '0;
      cur_off    <= '0;
      lin_active <= 1'b0;
    end else if (seq.lin_load) begin
      lin_active <= fifo_pop;
      if (fifo_pop) begin
        cur     <= fifo_dout;
        cur_off <= (32'(fifo_dout.pos) > RL - K) ? 9'd0 : 9'(RL - K - 32'(fifo_dout.pos));
      end
    end else if (ctl_done_lin) begin
      lin_active <= 1'b0;
    end
  end

  // ---------------- linear WF rows (step 3) ----------------
  logic [LROWS-1:0][LIN_W-1:0] lin_dist;
  base_t cur_base;
  logic [8:0] ref_idx;
  logic lin_stb;

  assign cur_base = cur.bases[seq.cell_i];
  assign ref_idx  = cur_off + 9'(seq.cell_i) + 9'(seq.cell_j);
  assign lin_stb  = seq.cell_stb && !seq.cell_aff && lin_active;

  for (genvar r = 0; r < LROWS; r++) begin : g_lin
    linear_wf_row u_row (
      .clk, .rst_n,
      .init(seq.lin_load), .stb(lin_stb), .j(seq.cell_j),
      .read_base(cur_base), .ref_base(lin_ref[r][ref_idx]),
      .wf_dist(lin_dist[r]), .cells()
    );
  end

  // ---------------- minimum extraction (step 4) ----------------
  logic me_start, me_busy, me_done, me_found;
  logic [LIN_W-1:0] me_val;
  logic [LIW-1:0]   me_idx;

  min_extract #(.N(LROWS), .W(LIN_W)) u_min (
    .clk, .rst_n, .start(me_start), .valid(lin_valid), .vals(lin_dist),
    .busy(me_busy), .done(me_done), .found(me_found), .min_val(me_val), .min_idx(me_idx)
  );

  // ---------------- affine WF buffer (steps 5, 6) ----------------
  base_t [RL-1:0]        aff_read [SLOTS];
  base_t [WIN_BASES-1:0] aff_ref  [SLOTS];
  logic  [ID_W-1:0]      aff_id   [SLOTS];
  logic  [PL_W-1:0]      aff_pl   [SLOTS];
  logic  [SW-1:0]        aff_count;
  logic                  aff_active;
  logic [AFF_W-1:0]      aff_dist [SLOTS];
  logic [3:0]            aff_dir  [SLOTS];
  logic [7:0]            tb_i;
  logic [3:0]            tb_j;

  for (genvar s = 0; s < SLOTS; s++) begin : g_aff
    affine_wf_row u_aff (
      .clk, .rst_n,
      .init(seq.aff_load),
      .stb(seq.cell_stb && seq.cell_aff && aff_active && (s < 32'(aff_count))),
      .i(seq.cell_i), .j(seq.cell_j),
      .read_base(aff_read[s][seq.cell_i]),
      .ref_base(aff_ref[s][8'(seq.cell_i) + 8'(seq.cell_j)]),
      .wf_dist(aff_dist[s]),
      .rd_i(tb_i), .rd_j(tb_j), .rd_dir(aff_dir[s])
    );
  end

  // ---------------- traceback (step 7) ----------------
  logic [$clog2(SLOTS)-1:0] tslot;
  logic tb_go, tb_busy, tb_done;
  result_t tb_res;

  traceback_unit u_tb (
    .clk, .rst_n, .start(tb_go),
    .id(aff_id[tslot]), .pl(aff_pl[tslot]), .wf_dist(aff_dist[tslot]),
    .rd_i(tb_i), .rd_j(tb_j), .rd_dir(aff_dir[tslot]),
    .busy(tb_busy), .done(tb_done), .result(tb_res)
  );

  // ---------------- crossbar controller ----------------

  assign me_start     = seq.lin_finish && lin_active && (cst == C_IDLE);
  assign ctl_done_lin = me_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst        <= C_IDLE;
      aff_count  <= '0;
      aff_active <= 1'b0;
      tslot      <= '0;
      tb_go      <= 1'b0;
      res_valid  <= 1'b0;
      n_filtered <= '0;
    end else begin
      tb_go <= 1'b0;
      unique case (cst)
        C_IDLE: begin
          if (me_start) cst <= C_MIN;
          if (seq.aff_load)
            aff_active <= (32'(aff_count) == SLOTS) || (seq.aff_flush && aff_count != 0);
          if (seq.tb_start && aff_active) begin
            tslot <= '0;
            tb_go <= 1'b1;
            cst   <= C_TB_RUN;
          end
        end
        C_MIN: begin
          if (me_done) begin
            cst <= C_IDLE;
            if (me_found && 32'(me_val) <= ETH && 32'(aff_count) < SLOTS) begin
              aff_count <= aff_count + 1'b1;
            end else begin
              n_filtered <= n_filtered + 1;
            end
          end
        end
        C_TB_RUN: begin
          if (tb_done) begin
            res_valid <= 1'b1;
            cst       <= C_TB_OUT;
          end
        end
        default: begin  // C_TB_OUT
          if (res_ready) begin
            res_valid <= 1'b0;
            if (32'(tslot) + 1 < 32'(aff_count)) begin
              tslot <= tslot + 1'b1;
              tb_go <= 1'b1;
              cst   <= C_TB_RUN;
            end else begin
              aff_count  <= '0;
              aff_active <= 1'b0;
              cst        <= C_IDLE;
            end
          end
        end
      endcase
    end
  end

  // step 5 copy into the next free affine instance
  always_ff @(posedge clk) begin
    if (cst == C_MIN && me_done && me_found && 32'(me_val) <= ETH && 32'(aff_count) < SLOTS) begin
      aff_read[aff_count[$clog2(SLOTS)-1:0]] <= cur.bases;
      aff_ref[aff_count[$clog2(SLOTS)-1:0]]  <= lin_ref[me_idx][cur_off +: WIN_BASES];
      aff_id[aff_count[$clog2(SLOTS)-1:0]]   <= cur.id;
      aff_pl[aff_count[$clog2(SLOTS)-1:0]] <= lin_pl[me_idx] + PL_W'(cur_off) + PL_W'(ETH);
    end
  end

  assign res = tb_res;

  assign stat = '{fifo_full:     fifo_full,
                  fifo_nonempty: !fifo_empty && indexed,
                  aff_full:      (32'(aff_count) == SLOTS),
                  aff_nonempty:  (aff_count != 0),
                  busy:          (cst != C_IDLE) || me_busy || tb_busy};

  // a linear iteration must never find the affine buffer full
  a_aff_room: assert property (@(posedge clk) disable iff (!rst_n)
    (cst == C_MIN && me_done && me_found && 32'(me_val) <= ETH) |-> (32'(aff_count) < SLOTS));
endmodule
