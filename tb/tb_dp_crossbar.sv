// tb_dp_crossbar: one crossbar at its full size (32 linear rows, 480-read FIFO,
// 8 affine instances), with the testbench issuing the chip controller's strobes
// one cell per clock. 32 random reference segments are indexed, then reads derived
// from random segments (with random edits and minimizer positions) and unrelated
// reads are queued. For every linear iteration the expected best row is found with
// the linear model; filtered reads must be dropped, kept ones must come back after
// the affine iteration with the right ID, location and affine distance, and with a
// traceback whose replay cost equals that distance. Also checked: the maxReads
// bound (MAX_READS is set to 12 here), the affine-full trigger and the flush.
module tb_dp_crossbar;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  localparam int MAXR = 12;

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, rd_valid = 0, rd_ready, res_valid, res_ready = 1, indexed;
  ref_wr_t wr;
  read_pkt_t rd;
  seq_t seq;
  xstat_t stat;
  result_t res;
  logic [MIN_W-1:0] my_min;
  logic [31:0] n_dropped, n_filtered;
  int checks = 0, failures = 0;
  int exp_filt = 0, n_edge_kept = 0;

  always #5 clk = ~clk;

  dp_crossbar #(.MAX_READS(MAXR)) dut (.clk, .rst_n, .wr_valid, .wr, .my_min, .indexed, .rd_valid,
    .rd, .rd_ready, .seq, .stat, .res_valid, .res, .res_ready, .n_dropped, .n_filtered);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  base_t [REF_BASES-1:0] seg [LIN_ROWS];
  logic [PL_W-1:0]       segpl [LIN_ROWS];
  read_pkt_t             sent [$];

  typedef struct { int id; int pl; int d; read_a rd; win_a wn; } exp_t;
  exp_t expq [$];

  task automatic cells(input logic aff);
    for (int i = 0; i < RL; i++)
      for (int j = 0; j < BAND; j++) begin
        seq = '0; seq.cell_stb = 1; seq.cell_aff = aff; seq.cell_i = 8'(i); seq.cell_j = 4'(j);
        @(negedge clk);
      end
    seq = '0;
  endtask

  task automatic wait_idle();
    @(negedge clk); @(negedge clk);
    while (stat.busy) @(negedge clk);
  endtask

  task automatic collect(input int n);
    int got; got = 0;
    while (got < n) begin
      if (res_valid) begin
        exp_t e; int cost;
        e = expq.pop_front();
        check("result id", int'(res.id) == e.id);
        check("result location", int'(res.pl) == e.pl);
        check("result distance", int'(res.wf_dist) == e.d);
        cost = replay_cost(e.rd, e.wn, RL, ETH, res.ops, int'(res.nops));
        check("traceback replays to the distance", !res.trunc && cost == e.d);
        got++;
      end
      @(negedge clk);
    end
  endtask

  task automatic affine_iter(input logic flush, input int n);
    seq = '0; seq.aff_load = 1; seq.aff_flush = flush; @(negedge clk); seq = '0;
    cells(1'b1);
    seq.tb_start = 1; @(negedge clk); seq = '0;
    collect(n);
    wait_idle();
  endtask

  // one linear iteration with its expected outcome
  task automatic linear_iter();
    read_pkt_t p; int off, best, bi, d;
    read_a rdv; win_a wn;
    p = sent.pop_front();
    off = RL - K - int'(p.pos);
    for (int r = 0; r < RL; r++) rdv[r] = p.bases[r];
    best = 99; bi = 0;
    for (int row = 0; row < LIN_ROWS; row++) begin
      for (int c = 0; c < WIN_BASES; c++) wn[c] = seg[row][off + c];
      d = lin_model(rdv, wn, RL, ETH);
      if (d < best) begin best = d; bi = row; end
    end
    if (best == ETH) n_edge_kept++;
    if (best > ETH) exp_filt++;
    if (best <= ETH) begin
      exp_t e;
      for (int c = 0; c < WIN_BASES; c++) wn[c] = seg[bi][off + c];
      e.id = int'(p.id); e.pl = int'(segpl[bi]) + off + ETH; e.rd = rdv; e.wn = wn;
      e.d = aff_model(rdv, wn, RL, ETH, ETH_AFF);
      expq.push_back(e);
    end
    seq = '0; seq.lin_load = 1; @(negedge clk); seq = '0;
    cells(1'b0);
    seq.lin_finish = 1; @(negedge clk); seq = '0;
    wait_idle();
  endtask

  initial begin
    int nkept, filt0;
    seq = '0; wr = '0; rd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    check("not indexed after reset", !indexed);
    // step 0: indexing
    for (int row = 0; row < LIN_ROWS; row++) begin
      for (int c = 0; c < REF_BASES; c++) seg[row][c] = base_t'($urandom_range(3));
      segpl[row] = $urandom;
      wr = '0; wr.row = 5'(row); wr.minimizer = 24'h00ABCD; wr.pl = segpl[row]; wr.seg = seg[row];
      wr_valid = 1; @(negedge clk);
    end
    wr_valid = 0;
    check("indexed", indexed && my_min == 24'h00ABCD);
    // step 1: seeding, related reads (one at exactly eth, one at eth+1) and 2 unrelated; 2 beyond maxReads
    for (int k = 0; k < 14; k++) begin
      read_a rdv; win_a wn; int row, pos, off;
      row = $urandom_range(LIN_ROWS - 1); pos = $urandom_range(RL - K);
      off = RL - K - pos;
      for (int c = 0; c < WIN_BASES; c++) wn[c] = seg[row][off + c];
      mutate(wn, $urandom_range(2), (k % 3 == 0) ? 1 : 0, (k % 4 == 1) ? 1 : 0, rdv);
      if (k == 4 || k == 7) for (int r = 0; r < RL; r++) rdv[r] = base_t'($urandom_range(3));
      // boundary reads: exactly eth (kept) and eth+1 (filtered) spaced substitutions
      if (k == 1 || k == 2) begin
        mutate(wn, 0, 0, 0, rdv);
        for (int e = 0; e < ETH + k - 1; e++) rdv[10 + 20 * e] = rdv[10 + 20 * e] + 2'd1;
      end
      rd = '0; rd.id = 32'(1000 + k); rd.minimizer = 24'h00ABCD; rd.pos = 8'(pos);
      for (int r = 0; r < RL; r++) rd.bases[r] = rdv[r];
      rd_valid = 1;
      #1 check("ready", rd_ready);
      @(negedge clk);
      if (k < MAXR) sent.push_back(rd);
    end
    rd_valid = 0;
    check("reads beyond maxReads dropped", n_dropped == 2);
    check("FIFO holds reads", stat.fifo_nonempty && !stat.fifo_full);
    // steps 2-7
    filt0 = 0;
    while (sent.size() > 0) begin
      linear_iter();
      if (stat.aff_full) begin
        check("8 instances when full", expq.size() == AFF_SLOTS);
        affine_iter(1'b0, AFF_SLOTS);
        filt0++;
      end
    end
    check("FIFO drained", !stat.fifo_nonempty);
    check("affine-full iteration happened", filt0 == 1);
    check("filtered reads", n_filtered == 32'(exp_filt) && exp_filt == 3);
    check("read at exactly eth kept", n_edge_kept == 1);
    nkept = expq.size();
    check("leftover for flush", nkept == MAXR - exp_filt - AFF_SLOTS && stat.aff_nonempty);
    affine_iter(1'b1, nkept);
    check("all delivered", expq.size() == 0 && !stat.aff_nonempty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
