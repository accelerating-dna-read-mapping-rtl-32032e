// reads_fifo: the reads FIFO region of a crossbar (160 rows x 3 reads = 480 entries).
//
// Reads tagged with the crossbar's minimizer are appended during seeding (step 1)
// and removed one per linear WF iteration (step 2). Each entry holds the read's
// 150 bases (300 bits), its ID and the minimizer's position in the read, about a
// third of a 1024-bit row. `full` is what tells the controllers to stop the read
// stream. The region is written here as a circular buffer over an entry array;
// pointers, the push/pop handshake and first-word-fall-through output are this
// design's choice.
//
// Interface: `push` with `din` appends (ignored when full); `pop` removes the head
// shown on `dout` (ignored when empty). Both take effect at the clock edge.
module reads_fifo
  import dp_pkg::*;
#(
  parameter int unsigned ROWS    = FIFO_ROWS,
  parameter int unsigned PER_ROW = READS_PER_ROW
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  fifo_entry_t din,
  input  logic        pop,
  output fifo_entry_t dout,
  output logic        full,
  output logic        empty,
  output logic [$clog2(ROWS*PER_ROW+1)-1:0] count
);
  localparam int unsigned DEPTH = ROWS * PER_ROW;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  fifo_entry_t mem [DEPTH];
  logic [AW-1:0] wp, rp;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  assign full  = (32'(count) == DEPTH);
  assign empty = (count == 0);
  assign dout  = mem[rp];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      if (do_push && !do_pop) count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end
endmodule
