// tb_chip_controller: a 4-bank chip controller at the default cell costs (130 and
// 660 clocks). The bank side is driven by the testbench. Checks indexing decode and
// minimizer-range routing, then the strobe stream of a linear iteration (1950
// cells in band order, exactly 130 clocks apart, 253,500 clocks from load to last
// cell), the affine iteration that follows when a bank reports a full affine
// buffer (660 clocks apart), the flush command, and `done` after each command.
module tb_chip_controller;
  import dp_pkg::*;

  localparam int NB = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done, wr_valid = 0, rd_valid = 0, rd_ready, res_valid, res_ready = 1;
  cmd_t cmd;
  ref_wr_t wr, bk_wr;
  read_pkt_t rd, bk_rd;
  xstat_t stat;
  result_t res;
  logic [NB-1:0] bk_wr_valid, bk_rd_valid, bk_rd_ready, bk_res_valid, bk_res_ready;
  seq_t bk_seq;
  xstat_t [NB-1:0] bk_stat;
  result_t [NB-1:0] bk_res;
  logic [31:0] n_lin_iter, n_aff_iter;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  chip_controller #(.NB(NB)) dut (.clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .done, .wr_valid, .wr,
    .rd_valid, .rd, .rd_ready, .stat, .res_valid, .res, .res_ready, .bk_wr_valid, .bk_wr,
    .bk_rd_valid, .bk_rd, .bk_rd_ready, .bk_seq, .bk_stat, .bk_res_valid, .bk_res, .bk_res_ready,
    .n_lin_iter, .n_aff_iter);

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // strobe monitor
  int cyc = 0, n_cells = 0, last_stb = 0, gap_bad = 0, order_bad = 0, t_load = 0, t_last = 0;
  int n_loads = 0, n_fin = 0, n_aload = 0, n_tb = 0, exp_i = 0, exp_j = 0, n_aff_cells = 0;
  logic flush_seen = 0;
  always @(posedge clk) begin
    cyc++;
    if (bk_seq.lin_load) begin n_loads++; t_load = cyc; exp_i = 0; exp_j = 0; last_stb = cyc; end
    if (bk_seq.aff_load) begin n_aload++; exp_i = 0; exp_j = 0; last_stb = cyc; flush_seen = bk_seq.aff_flush; end
    if (bk_seq.cell_stb) begin
      if (cyc - last_stb != (bk_seq.cell_aff ? CELL_CYC_AFF : CELL_CYC_LIN))
        gap_bad++;
      if (int'(bk_seq.cell_i) != exp_i || int'(bk_seq.cell_j) != exp_j) order_bad++;
      if (exp_j == BAND - 1) begin exp_j = 0; exp_i++; end else exp_j++;
      last_stb = cyc; t_last = cyc;
      if (bk_seq.cell_aff) n_aff_cells++; else n_cells++;
    end
    if (bk_seq.lin_finish) n_fin++;
    if (bk_seq.tb_start) n_tb++;
  end

  task automatic command(input cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1; #1 check("command accepted", cmd_ready);
    @(negedge clk); cmd_valid = 0;
  endtask

  initial begin
    wr = '0; rd = '0; bk_stat = '0; bk_res = '0; bk_res_valid = '0; bk_rd_ready = '1; cmd = CMD_NONE;
    repeat (3) @(negedge clk); rst_n = 1;
    // indexing: bank b holds minimizers 100b .. 100b+50
    for (int b = 0; b < NB; b++) for (int m = 0; m <= 50; m += 25) begin
      wr.bank = 10'(b); wr.minimizer = 24'(100 * b + m); wr_valid = 1; #1;
      check("write decode", bk_wr_valid == NB'(1 << b));
      @(negedge clk);
    end
    wr_valid = 0;
    rd.minimizer = 24'd210; rd_valid = 1; #1;
    check("range routing", bk_rd_valid == 4'b0100 && rd_ready);
    rd.minimizer = 24'd170; #1;
    check("between ranges: dropped", bk_rd_valid == 4'b0000 && rd_ready);
    rd.minimizer = 24'd350; bk_rd_ready = 4'b0111; #1;
    check("held while bank busy", bk_rd_valid == 0 && !rd_ready);
    rd_valid = 0; bk_rd_ready = '1;

    // linear iteration followed by an affine iteration
    command(CMD_LIN_ITER);
    while (!bk_seq.lin_finish) @(negedge clk);
    check("1950 linear cells", n_cells == RL * BAND);
    check("cells 130 clocks apart", gap_bad == 0);
    check("band order", order_bad == 0);
    check("linear cell time 253,500", t_last - t_load == RL * BAND * CELL_CYC_LIN);
    @(negedge clk); bk_stat[1].busy = 1; repeat (40) @(negedge clk);
    bk_stat[1].busy = 0; bk_stat[3].aff_full = 1; bk_stat[3].aff_nonempty = 1;
    while (!bk_seq.tb_start) @(negedge clk);
    check("affine iteration after full", n_aload == 1 && n_aff_cells == RL * BAND && !flush_seen);
    check("affine cells 660 clocks apart", gap_bad == 0 && order_bad == 0);
    bk_stat[3] = '0; bk_stat[3].busy = 1; repeat (10) @(negedge clk); bk_stat[3].busy = 0;
    while (!done) @(negedge clk);
    check("counters", n_lin_iter == 1 && n_aff_iter == 1);

    // linear iteration with no full buffer: no affine phase
    command(CMD_LIN_ITER);
    while (!done) @(negedge clk);
    check("no affine without full buffer", n_aload == 1 && n_loads == 2 && n_fin == 2);

    // flush with a partly filled buffer
    bk_stat[0].aff_nonempty = 1;
    command(CMD_FLUSH);
    while (!bk_seq.tb_start) @(negedge clk);
    @(negedge clk);
    check("flush runs an affine iteration", n_aload == 2 && flush_seen && n_tb == 2);
    bk_stat[0] = '0;
    while (!done) @(negedge clk);
    // flush with nothing to do
    command(CMD_FLUSH);
    while (!done) @(negedge clk);
    check("empty flush does no affine work", n_aload == 3 && n_aff_iter == 2 && n_tb == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
