// tb_linear_wf_row: checks the linear WF row against the 2-D band model.
// Cases: exact placement (distance 0), a few substitutions, indels, and random
// pairs that saturate at eth+1. The strobes are issued back to back (one cell per
// clock); the 130-cycle spacing is the chip controller's and is checked there.
module tb_linear_wf_row;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, init = 0, stb = 0;
  logic [3:0] j;
  base_t rb, fb;
  logic [LIN_W-1:0] wf_dist;
  logic [2*ETH:0][LIN_W-1:0] cells;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  linear_wf_row dut (.clk, .rst_n, .init, .stb, .j, .read_base(rb), .ref_base(fb), .wf_dist, .cells);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input read_a rd, input win_a wn, output int got);
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    for (int i = 0; i < RL; i++)
      for (int jj = 0; jj < BAND; jj++) begin
        stb = 1; j = 4'(jj); rb = rd[i]; fb = wn[i + jj];
        @(negedge clk);
      end
    stb = 0;
    got = int'(wf_dist);
  endtask

  initial begin
    read_a rd; win_a wn; int got, exp;
    j = 0; rb = 0; fb = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int ns, ni, nd;
      ns = (t < 5) ? 0 : $urandom_range(4);
      ni = (t < 10) ? 0 : $urandom_range(2);
      nd = (t < 10) ? 0 : $urandom_range(2);
      if (t >= 50) ns = 20 + t;       // heavy damage: saturation
      make_case(rd, wn, ns, ni, nd);
      exp = lin_model(rd, wn, RL, ETH);
      run(rd, wn, got);
      checks++;
      if (t < 5 && got != 0) begin failures++; $display("exact case %0d gave %0d", t, got); end
      if (got != exp) begin
        failures++;
        $display("case %0d: sub=%0d ins=%0d del=%0d got %0d expected %0d", t, ns, ni, nd, got, exp);
      end
    end
    // saturation value is eth+1
    checks++;
    if (got != ETH + 1) begin failures++; $display("saturated case gave %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
