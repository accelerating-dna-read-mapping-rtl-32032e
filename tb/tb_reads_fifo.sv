// tb_reads_fifo: fills the reads FIFO to its 480-entry capacity, checks `full`,
// that a push when full is ignored, that entries leave in order, and a mixed
// random push/pop phase against a queue model.
module tb_reads_fifo;
  import dp_pkg::*;

  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  fifo_entry_t din, dout;
  logic [$clog2(FIFO_ROWS*READS_PER_ROW+1)-1:0] count;
  int checks = 0, failures = 0;
  fifo_entry_t model[$];

  always #5 clk = ~clk;

  reads_fifo dut (.clk, .rst_n, .push, .din, .pop, .dout, .full, .empty, .count);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fifo_entry_t rnd_entry();
    fifo_entry_t e;
    e.id = $urandom; e.pos = 8'($urandom_range(138));
    for (int k = 0; k < RL; k++) e.bases[k] = base_t'($urandom_range(3));
    return e;
  endfunction

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    din = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    check("empty after reset", empty && !full);
    for (int k = 0; k < FIFO_ROWS * READS_PER_ROW; k++) begin
      din = rnd_entry(); model.push_back(din); push = 1; @(negedge clk);
    end
    din = rnd_entry(); @(negedge clk); push = 0;   // ignored push when full
    check("full at 480", full && int'(count) == FIFO_ROWS * READS_PER_ROW);
    for (int k = 0; k < 100; k++) begin
      check("order", dout == model.pop_front()); pop = 1; @(negedge clk); pop = 0;
    end
    for (int k = 0; k < 3000; k++) begin
      push = $urandom_range(1); pop = $urandom_range(1); din = rnd_entry();
      if (pop && model.size() > 0) check("random order", dout == model[0]);
      @(negedge clk);
      if (pop && model.size() > 0) void'(model.pop_front());
      if (push && model.size() < FIFO_ROWS * READS_PER_ROW + (pop ? 1 : 0)) model.push_back(din);
      push = 0; pop = 0;
      check("count", int'(count) == model.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
