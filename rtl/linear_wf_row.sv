// linear_wf_row: one row of the linear WF buffer, the pre-alignment filter.
//
// The row keeps the "WF distances buffer" of 2*eth+1 = 13 saturating 3-bit cells
// (39 bits) and computes the banded linear Wagner-Fischer distance between a read
// and a reference window, one matrix cell per strobe, as in the row algorithm of
// the design: for read base i and band cell j the reference base is window[i+j];
// the new value of cell j is the minimum of
//   cells[j]   + (read[i] != ref[i+j])   (top-left, still the previous row's value)
//   cells[j-1] + 1                       (left, already updated in this row)
//   cells[j+1] + 1                       (top, still the previous row's value)
// where the left term is absent for j = 0 and the top term for j = 2*eth, and the
// result is capped at eth+1 = 7. All weights are 1. The buffer starts at zero and
// the distance is cells[eth] after the last read base.
//
// Interface: `init` clears the buffer; `stb` with `j`, `read_base`, `ref_base`
// computes one cell in place on the next clock edge. The cycle cost of a cell
// (130 MAGIC NOR cycles in the memristive row) is modelled by whoever issues the
// strobes, not here. On a match the design's per-cell procedure returns the
// top-left value directly while its row-level procedure takes the minimum of all
// three terms; this block follows the row-level form, which differs only at the
// band edges. Here the cell logic is ordinary CMOS logic rather than a NOR sequence
// in memory cells: the values and their update order follow the design.
module linear_wf_row
  import dp_pkg::*;
#(
  parameter int unsigned E = ETH,          // error threshold; band = 2E+1
  parameter int unsigned W = LIN_W         // bits per cell
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,
  input  logic                 stb,
  input  logic [3:0]           j,
  input  base_t                read_base,
  input  base_t                ref_base,
  output logic [W-1:0]         wf_dist,
  output logic [2*E:0][W-1:0]  cells
);
  localparam int unsigned NB  = 2 * E + 1;
  localparam logic [W-1:0] CAP = W'(E + 1);

  logic [W:0] diag_t, left_t, top_t, best;
  logic [W-1:0] next_val;

  always_comb begin
    diag_t = {1'b0, cells[j]} + ((read_base != ref_base) ? (W+1)'(1) : '0);
    left_t = (j != 0)             ? {1'b0, cells[j-1]} + (W+1)'(1) : '1;
    top_t  = (32'(j) != NB - 1)   ? {1'b0, cells[j+1]} + (W+1)'(1) : '1;
    best   = diag_t;
    if (left_t < best) best = left_t;
    if (top_t  < best) best = top_t;
    next_val = (best > {1'b0, CAP}) ? CAP : best[W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cells <= '0;
    end else if (init) begin
      cells <= '0;
    end else if (stb) begin
      cells[j] <= next_val;
    end
  end

  assign wf_dist = cells[E];
endmodule
