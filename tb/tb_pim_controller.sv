// tb_pim_controller: a 4-chip module controller with the chip side driven by the
// testbench. Checks chip decode and range routing of writes and reads, the stop
// signal (raised by any full FIFO, blocking reads), command broadcast and
// completion only after every chip is done (chips finishing at different times),
// command refusal while a chip is busy, all_empty, and round-robin results.
module tb_pim_controller;
  import dp_pkg::*;

  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, rd_valid = 0, rd_ready, stop_reads, cmd_valid = 0, cmd_ready, cmd_done;
  logic all_empty, res_valid, res_ready = 1, ch_cmd_valid;
  ref_wr_t wr, ch_wr;
  read_pkt_t rd, ch_rd;
  cmd_t cmd, ch_cmd;
  result_t res;
  logic [NC-1:0] ch_wr_valid, ch_rd_valid, ch_rd_ready, ch_cmd_ready, ch_done, ch_res_valid, ch_res_ready;
  xstat_t [NC-1:0] ch_stat;
  result_t [NC-1:0] ch_res;
  int checks = 0, failures = 0;
  int ndone = 0;
  always @(posedge clk) if (cmd_done) ndone++;

  always #5 clk = ~clk;

  pim_controller #(.NC(NC)) dut (.clk, .rst_n, .wr_valid, .wr, .rd_valid, .rd, .rd_ready, .stop_reads,
    .cmd_valid, .cmd, .cmd_ready, .cmd_done, .all_empty, .res_valid, .res, .res_ready, .ch_wr_valid,
    .ch_wr, .ch_rd_valid, .ch_rd, .ch_rd_ready, .ch_cmd_valid, .ch_cmd, .ch_cmd_ready, .ch_done,
    .ch_stat, .ch_res_valid, .ch_res, .ch_res_ready);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int seen [NC]; int dcyc;
    wr = '0; rd = '0; cmd = CMD_NONE; ch_rd_ready = '1; ch_cmd_ready = '1; ch_done = '0;
    ch_stat = '0; ch_res = '0; ch_res_valid = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    check("empty after reset", all_empty && !stop_reads);
    for (int c = 0; c < NC; c++) begin
      wr.chip = 8'(c); wr.minimizer = 24'(1000 * c + 5); wr_valid = 1; #1;
      check("write decode", ch_wr_valid == NC'(1 << c));
      @(negedge clk);
      wr.minimizer = 24'(1000 * c + 900); #1; @(negedge clk);
    end
    wr_valid = 0;
    rd.minimizer = 24'd1900; rd_valid = 1; #1;
    check("read at a chip's highest minimizer", ch_rd_valid == 4'b0010);
    rd.minimizer = 24'd2005; #1;
    check("read at a chip's lowest minimizer", ch_rd_valid == 4'b0100);
    rd.minimizer = 24'd2950; #1;
    check("read between chips dropped", ch_rd_valid == 4'b0000 && rd_ready);
    rd.minimizer = 24'd2500; #1;
    check("read to chip 2", ch_rd_valid == 4'b0100 && rd_ready);
    ch_stat[1].fifo_full = 1; #1;
    check("stop while a FIFO is full", stop_reads && !rd_ready && ch_rd_valid == 0);
    ch_stat[1].fifo_full = 0; ch_stat[1].fifo_nonempty = 1; #1;
    check("not empty", !all_empty && !stop_reads && rd_ready);
    rd_valid = 0;
    // command
    @(negedge clk); cmd = CMD_LIN_ITER; cmd_valid = 1; #1;
    check("broadcast", ch_cmd_valid && ch_cmd == CMD_LIN_ITER);
    @(negedge clk); cmd_valid = 0; ch_cmd_ready = '0;
    #1 check("no second command while waiting", !cmd_ready);
    // chips finish at different times
    dcyc = 0;
    for (int c = 0; c < NC; c++) begin
      repeat (3) @(negedge clk);
      ch_done = NC'(1 << c); @(negedge clk); ch_done = '0;
      if (c < NC - 1) begin @(negedge clk); if (cmd_done) dcyc++; end
    end
    @(negedge clk);
    check("done only after all chips", dcyc == 0);
    repeat (2) @(negedge clk);
    ch_cmd_ready = '1;
    // results round robin
    for (int c = 0; c < NC; c++) begin ch_res[c].id = 32'(c); seen[c] = 0; end
    ch_res_valid = '1;
    for (int k = 0; k < NC; k++) begin
      logic [NC-1:0] taken;
      #1 taken = ch_res_ready;
      if (res_valid) seen[res.id]++;
      @(negedge clk);
      ch_res_valid = ch_res_valid & ~taken;
    end
    for (int c = 0; c < NC; c++) check("each result once", seen[c] == 1);
    check("exactly one completion", ndone == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
