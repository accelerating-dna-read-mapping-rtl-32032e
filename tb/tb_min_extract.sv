// tb_min_extract: random distances and valid masks; checks the minimum, the first
// row holding it, `found` for an all-invalid mask, and that a scan takes exactly
// N clocks (one row per clock).
module tb_min_extract;
  import dp_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done, found;
  logic [LIN_ROWS-1:0] valid;
  logic [LIN_ROWS-1:0][LIN_W-1:0] vals;
  logic [LIN_W-1:0] min_val;
  logic [$clog2(LIN_ROWS)-1:0] min_idx;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  min_extract dut (.clk, .rst_n, .start, .valid, .vals, .busy, .done, .found, .min_val, .min_idx);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, em, ei; logic ef;
    valid = '0; vals = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int r = 0; r < LIN_ROWS; r++) vals[r] = LIN_W'($urandom_range(7));
      valid = (t == 0) ? '0 : (t < 100 ? '1 : LIN_ROWS'($urandom));
      ef = 0; em = 99; ei = 0;
      for (int r = 0; r < LIN_ROWS; r++)
        if (valid[r] && int'(vals[r]) < em) begin ef = 1; em = int'(vals[r]); ei = r; end
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (found != ef || (ef && (int'(min_val) != em || int'(min_idx) != ei))) begin
        failures++; $display("case %0d: got %0d/%0d/%0d exp %0d/%0d/%0d", t, found, min_val, min_idx, ef, em, ei);
      end
      checks++;
      if (cyc != LIN_ROWS + 1) begin failures++; $display("scan took %0d clocks", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
