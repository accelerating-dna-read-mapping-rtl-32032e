// tb_affine_wf_row: checks the affine WF instance (distance and every stored
// direction) against the 2-D affine band model, on exact, lightly and heavily
// edited read/window pairs.
module tb_affine_wf_row;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, init = 0, stb = 0;
  logic [7:0] i, rd_i;
  logic [3:0] j, rd_j;
  base_t rb, fb;
  logic [AFF_W-1:0] wf_dist;
  logic [3:0] rd_dir;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  affine_wf_row dut (.clk, .rst_n, .init, .stb, .i, .j, .read_base(rb), .ref_base(fb), .wf_dist,
                     .rd_i, .rd_j, .rd_dir);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    read_a rd; win_a wn; int exp, bad;
    i = 0; j = 0; rb = 0; fb = 0; rd_i = 0; rd_j = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int ns, ni, nd;
      ns = (t < 3) ? 0 : $urandom_range(5);
      ni = (t < 6) ? 0 : $urandom_range(3);
      nd = (t < 6) ? 0 : $urandom_range(3);
      if (t >= 35) ns = 40;
      make_case(rd, wn, ns, ni, nd);
      exp = aff_model(rd, wn, RL, ETH, ETH_AFF);
      @(negedge clk); init = 1; @(negedge clk); init = 0;
      for (int r = 0; r < RL; r++)
        for (int jj = 0; jj < BAND; jj++) begin
          stb = 1; i = 8'(r); j = 4'(jj); rb = rd[r]; fb = wn[r + jj];
          @(negedge clk);
        end
      stb = 0;
      checks++;
      if (int'(wf_dist) != exp) begin
        failures++;
        $display("case %0d: got %0d expected %0d", t, wf_dist, exp);
      end
      if (t < 3 && wf_dist != 0) begin failures++; $display("exact case %0d not 0", t); end
      bad = 0;
      for (int r = 0; r < RL; r++)
        for (int jj = 0; jj < BAND; jj++) begin
          rd_i = 8'(r); rd_j = 4'(jj); #1;
          if (rd_dir != aff_dir(r, jj)) bad++;
        end
      checks++;
      if (bad != 0) begin failures++; $display("case %0d: %0d directions differ", t, bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
