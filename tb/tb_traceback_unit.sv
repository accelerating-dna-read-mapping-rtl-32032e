// tb_traceback_unit: drives the traceback walk with directions from the affine
// model and checks the packed result: ID, location and distance fields, that the
// operations replay to exactly the read against the window (every M a match, every
// X a mismatch), and that their affine cost equals the distance.
module tb_traceback_unit;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [ID_W-1:0] id;
  logic [PL_W-1:0] pl;
  logic [AFF_W-1:0] wf_dist;
  logic [7:0] rd_i;
  logic [3:0] rd_j, rd_dir;
  logic busy, done;
  result_t result;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  traceback_unit dut (.clk, .rst_n, .start, .id, .pl, .wf_dist, .rd_i, .rd_j, .rd_dir, .busy, .done,
                      .result);

  assign rd_dir = aff_dir(int'(rd_i), int'(rd_j));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    read_a rd; win_a wn; int d, cost, cyc, gaps;
    id = 0; pl = 0; wf_dist = 0; gaps = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      make_case(rd, wn, $urandom_range(4), (t < 5) ? 0 : $urandom_range(3), (t < 5) ? 0 : $urandom_range(3));
      d = aff_model(rd, wn, RL, ETH, ETH_AFF);
      id = $urandom; pl = $urandom; wf_dist = AFF_W'(d);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (result.id != id || result.pl != pl || int'(result.wf_dist) != d) begin
        failures++; $display("case %0d: header fields wrong", t);
      end
      cost = replay_cost(rd, wn, RL, ETH, result.ops, int'(result.nops));
      checks++;
      if (result.trunc || cost != d) begin
        failures++;
        $display("case %0d: trunc=%0d nops=%0d replay cost %0d, distance %0d", t, result.trunc,
                 result.nops, cost, d);
      end
      for (int k = 0; k < int'(result.nops); k++) if (result.ops[k] >= 2) gaps++;
      // one direction read per clock: at least one clock per operation
      checks++;
      if (cyc < int'(result.nops)) begin failures++; $display("case %0d: too fast", t); end
    end
    checks++;
    if (gaps == 0) begin failures++; $display("no gap was ever traced"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
