// Shared body of the module-level testbenches. The including module defines
// NCHIP_T, NBANK_T, NXBAR_T, LROWS_T, MAXR_T, N_READS_T, HOT_T, CHECK_MECH and
// WATCHDOG_T, instantiates dart_pim as `dut` on the signals declared here, and
// prints the result line when `run_done` fires.
//
// Plays the main core: indexes random reference segments into every crossbar
// (crossbars 2 and 3 share one minimizer, as a frequent minimizer spread over two
// crossbars would), streams reads derived from those segments (plus unrelated
// reads and reads whose minimizer no crossbar holds), issues linear iterations
// whenever the stream stops or runs out, flushes at the end, and checks every
// result against the linear/affine models: each expected (read, location) pair
// must arrive exactly once with the model's distance, and its traceback must
// replay to that distance. The stream is biased towards crossbar HOT_T so that
// its FIFO fills and its maxReads bound is reached.

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, rd_valid = 0, rd_ready, stop_reads, cmd_valid = 0, cmd_ready, cmd_done;
  logic all_empty, res_valid, res_ready = 1;
  ref_wr_t wr;
  read_pkt_t rd;
  cmd_t cmd;
  result_t res;
  logic [31:0] n_lin_iter, n_aff_iter, n_dropped, n_filtered;
  int checks = 0, failures = 0;
  event run_done;   // the including testbench reports and finishes on this

  localparam int NXB = NCHIP_T * NBANK_T * NXBAR_T;

  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int xb_min(input int g);
    return (g == 3) ? 120 : 100 + 10 * g;
  endfunction

  base_t [REF_BASES-1:0] seg [NXB][LROWS_T];

  typedef struct { int d; read_a rd; win_a wn; int seen; } exp_t;
  exp_t expmap [string];
  int fifo_occ [NXB];
  int accepted [NXB];
  int exp_filtered = 0, exp_dropped = 0, n_results = 0;
  int ev_stop = 0, ev_shared = 0, ev_nomatch = 0, ev_flush_work = 0, ev_resume = 0;

  // expected outcome of one read in crossbar g
  task automatic expect_read(input int g, input read_pkt_t p);
    int off, best, bi, d; read_a rdv; win_a wn;
    if (accepted[g] >= MAXR_T) begin exp_dropped++; return; end
    accepted[g]++; fifo_occ[g]++;
    off = RL - K - int'(p.pos);
    for (int r = 0; r < RL; r++) rdv[r] = p.bases[r];
    best = 99; bi = 0;
    for (int row = 0; row < LROWS_T; row++) begin
      for (int c = 0; c < WIN_BASES; c++) wn[c] = seg[g][row][off + c];
      d = lin_model(rdv, wn, RL, ETH);
      if (d < best) begin best = d; bi = row; end
    end
    if (best > ETH) begin exp_filtered++; return; end
    begin
      exp_t e; string key;
      for (int c = 0; c < WIN_BASES; c++) wn[c] = seg[g][bi][off + c];
      e.rd = rdv; e.wn = wn; e.seen = 0; e.d = aff_model(rdv, wn, RL, ETH, ETH_AFF);
      key = $sformatf("%0d_%0d", p.id, g * 1000000 + bi * 1000 + off + ETH);
      expmap[key] = e;
    end
  endtask

  // result collector
  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    string key; int cost;
    key = $sformatf("%0d_%0d", res.id, res.pl);
    n_results++;
    checks++;
    if (!expmap.exists(key)) begin
      failures++; $display("unexpected result %s", key);
    end else begin
      cost = replay_cost(expmap[key].rd, expmap[key].wn, RL, ETH, res.ops, int'(res.nops));
      if (int'(res.wf_dist) != expmap[key].d || cost != expmap[key].d || res.trunc
          || expmap[key].seen != 0) begin
        failures++;
        $display("result %s: dist %0d exp %0d replay %0d seen %0d", key, res.wf_dist,
                 expmap[key].d, cost, expmap[key].seen);
      end
      expmap[key].seen++;
    end
  end

  task automatic command(input cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1; @(negedge clk); cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
  endtask

  function automatic logic any_fifo();
    for (int g = 0; g < NXB; g++) if (fifo_occ[g] > 0) return 1;
    return 0;
  endfunction

  // make read number k
  function automatic read_pkt_t make_read(input int k, output int g);
    read_pkt_t p; read_a rdv; win_a wn; int row, pos, off, kind;
    kind = k % 7;
    g = (kind < 3) ? HOT_T : $urandom_range(NXB - 1);
    row = $urandom_range(LROWS_T - 1); pos = $urandom_range(RL - K);
    off = RL - K - pos;
    for (int c = 0; c < WIN_BASES; c++) wn[c] = seg[g][row][off + c];
    mutate(wn, $urandom_range(3), (k % 5 == 0) ? 1 : 0, (k % 4 == 1) ? 1 : 0, rdv);
    if (kind == 5) for (int r = 0; r < RL; r++) rdv[r] = base_t'($urandom_range(3));
    p.id = 32'(k); p.pos = 8'(pos); p.minimizer = 24'(xb_min(g));
    if (kind == 6 && k % 2 == 0) begin p.minimizer = 24'd5; g = -1; end
    for (int r = 0; r < RL; r++) p.bases[r] = rdv[r];
    return p;
  endfunction

  initial begin
    repeat (WATCHDOG_T) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k, lin_cmds, aff0, nexp;
    wr = '0; rd = '0; cmd = CMD_NONE;
    for (int g = 0; g < NXB; g++) begin fifo_occ[g] = 0; accepted[g] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    check("idle after reset", all_empty && !stop_reads);

    // offline indexing
    for (int g = 0; g < NXB; g++)
      for (int row = 0; row < LROWS_T; row++) begin
        for (int c = 0; c < REF_BASES; c++) seg[g][row][c] = base_t'($urandom_range(3));
        wr = '0;
        wr.chip = 8'(g / (NBANK_T * NXBAR_T));
        wr.bank = 10'((g / NXBAR_T) % NBANK_T);
        wr.xbar = 10'(g % NXBAR_T);
        wr.row = 5'(row); wr.minimizer = 24'(xb_min(g));
        wr.pl = 32'(g * 1000000 + row * 1000); wr.seg = seg[g][row];
        wr_valid = 1; @(negedge clk);
      end
    wr_valid = 0;

    // seeding and filtering, interleaved
    k = 0; lin_cmds = 0;
    begin
      read_pkt_t p; int g; logic pending, was_stopped;
      pending = 0; was_stopped = 0;
      while (k < N_READS_T || pending || any_fifo()) begin
        // seeding: stream until stopped or done
        while (k < N_READS_T || pending) begin
          if (!pending) begin p = make_read(k, g); k++; pending = 1; end
          rd = p; rd_valid = 1; #1;
          if (!rd_ready) begin
            if (stop_reads) begin ev_stop++; was_stopped = 1; end
            rd_valid = 0;
            break;
          end
          @(negedge clk); rd_valid = 0; pending = 0;
          if (was_stopped) begin ev_resume++; was_stopped = 0; end
          if (g < 0) ev_nomatch++;
          else if (g == 2 || g == 3) begin
            ev_shared++;
            expect_read(2, p); expect_read(3, p);
          end else expect_read(g, p);
        end
        // one linear iteration
        command(CMD_LIN_ITER);
        lin_cmds++;
        for (int g2 = 0; g2 < NXB; g2++) if (fifo_occ[g2] > 0) fifo_occ[g2]--;
      end
    end
    aff0 = int'(n_aff_iter);
    check("no reads left before flush", !any_fifo());
    check("linear iteration count", int'(n_lin_iter) == lin_cmds * NCHIP_T);
    if (!all_empty) ev_flush_work++;
    command(CMD_FLUSH);
    repeat (5) @(negedge clk);
    check("everything processed", all_empty);

    nexp = 0;
    foreach (expmap[key]) begin
      nexp++;
      if (expmap[key].seen != 1) begin failures++; $display("missing result %s", key); end
    end
    checks++;
    check("filtered count", int'(n_filtered) == exp_filtered);
    check("maxReads drops", int'(n_dropped) == exp_dropped);
    check("result count", n_results == nexp);
    $display("reads %0d, linear iteration commands %0d, chip-iterations: linear %0d affine %0d (%0d before flush), results %0d",
             k, lin_cmds, n_lin_iter, n_aff_iter, aff0, n_results);
    $display("events: stop %0d, resumed seeding %0d, shared minimizer %0d, no match %0d, filtered %0d, maxReads drops %0d, flush with work %0d",
             ev_stop, ev_resume, ev_shared, ev_nomatch, exp_filtered, exp_dropped, ev_flush_work);
    if (CHECK_MECH) begin
      check("stop_reads happened", ev_stop > 0);
      check("seeding resumed after filtering", ev_resume > 0);
      check("shared-minimizer broadcast happened", ev_shared > 0);
      check("unmatched read happened", ev_nomatch > 0);
      check("filtering dropped a read", exp_filtered > 0);
      check("maxReads bound reached", exp_dropped > 0);
      check("affine iteration on a full buffer happened", aff0 > 0);
      check("flush had work", ev_flush_work > 0);
    end
    check("some results", n_results > 0);
    -> run_done;
  end
