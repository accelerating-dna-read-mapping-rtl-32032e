// tb_bank_controller: drives the crossbar side of a 4-crossbar bank controller.
// Checks indexing write decode, exact-minimizer read routing (one match, two
// matches held until both are ready, no match dropped), strobe fan-out, status
// OR, and that results from several crossbars are passed on round robin, each
// exactly once.
module tb_bank_controller;
  import dp_pkg::*;

  localparam int NX = 4;
  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, rd_valid = 0, rd_ready, res_valid, res_ready = 0;
  ref_wr_t wr, xb_wr;
  read_pkt_t rd, xb_rd;
  seq_t seq_in, xb_seq;
  xstat_t stat;
  result_t res;
  logic [NX-1:0] xb_wr_valid, xb_indexed, xb_rd_valid, xb_rd_ready, xb_res_valid, xb_res_ready;
  logic [NX-1:0][MIN_W-1:0] xb_min;
  xstat_t [NX-1:0] xb_stat;
  result_t [NX-1:0] xb_res;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bank_controller #(.NX(NX)) dut (.clk, .rst_n, .wr_valid, .wr, .rd_valid, .rd, .rd_ready, .seq_in,
    .stat, .res_valid, .res, .res_ready, .xb_wr_valid, .xb_wr, .xb_min, .xb_indexed, .xb_rd_valid,
    .xb_rd, .xb_rd_ready, .xb_seq, .xb_stat, .xb_res_valid, .xb_res, .xb_res_ready);

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
    int seen [NX]; int last, order_ok;
    wr = '0; rd = '0; seq_in = '0; xb_stat = '0; xb_res = '0; xb_res_valid = '0;
    xb_min = '{24'h30, 24'h20, 24'h20, 24'h10}; // crossbar 3..0
    xb_indexed = 4'b1111; xb_rd_ready = '1;
    repeat (3) @(negedge clk); rst_n = 1;
    // writes
    for (int x = 0; x < NX; x++) begin
      wr.xbar = 10'(x); wr_valid = 1; #1;
      check("write decode", xb_wr_valid == NX'(1 << x) && xb_wr == wr);
      @(negedge clk);
    end
    wr.xbar = 10'(9); #1 check("out of range write ignored", xb_wr_valid == '0);
    wr_valid = 0;
    // reads
    rd.minimizer = 24'h10; rd_valid = 1; #1;
    check("single match", xb_rd_valid == 4'b0001 && rd_ready);
    rd.minimizer = 24'h20; #1;
    check("two matches", xb_rd_valid == 4'b0110 && rd_ready);
    xb_rd_ready = 4'b1011; #1;
    check("held until all matches ready", xb_rd_valid == '0 && !rd_ready);
    xb_rd_ready = '1; rd.minimizer = 24'h77; #1;
    check("no match: dropped", xb_rd_valid == '0 && rd_ready);
    xb_indexed = 4'b0111; rd.minimizer = 24'h30; #1;
    check("unindexed crossbar not matched", xb_rd_valid == '0);
    rd_valid = 0;
    // strobes and status
    seq_in = '0; seq_in.cell_stb = 1; seq_in.cell_i = 8'd77; seq_in.cell_j = 4'd5; #1;
    check("strobes fan out", xb_seq == seq_in);
    xb_stat[2].aff_full = 1; xb_stat[0].busy = 1; #1;
    check("status OR", stat.aff_full && stat.busy && !stat.fifo_full);
    // results: every crossbar offers one; all four must come out once each
    @(negedge clk);
    for (int x = 0; x < NX; x++) begin xb_res[x] = '0; xb_res[x].id = 32'(x); seen[x] = 0; end
    xb_res_valid = '1; res_ready = 1;
    order_ok = 1; last = -1;
    for (int k = 0; k < 2 * NX && xb_res_valid != 0; k++) begin
      logic [NX-1:0] taken;
      #1;
      taken = xb_res_ready;
      if (res_valid) begin
        seen[res.id]++;
        if (xb_res_ready != NX'(1 << res.id)) order_ok = 0;
        if (last >= 0 && int'(res.id) <= last) order_ok = 0;
        last = int'(res.id);
      end
      @(negedge clk);
      xb_res_valid = xb_res_valid & ~taken;
    end
    for (int x = 0; x < NX; x++) check("each result once", seen[x] == 1);
    check("round robin order and handshake", order_ok == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
