// min_extract: step 4 of a linear WF iteration, the minimum over the linear buffer.
//
// After the linear WF matrices are complete every valid row of the linear WF buffer
// holds a distance. This block scans the rows one per clock (the extraction is
// serial within a crossbar, parallel across crossbars) and returns the smallest
// distance and the first row that holds it; rows whose `valid` bit is clear (no
// reference segment written) are skipped. A scan takes N clocks after `start`;
// `done` pulses with `found`, `min_val` and `min_idx`. The one-row-per-clock rate
// and the lowest-index tie break are this design's choices.
module min_extract
  import dp_pkg::*;
#(
  parameter int unsigned N = LIN_ROWS,
  parameter int unsigned W = LIN_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [N-1:0]          valid,
  input  logic [N-1:0][W-1:0]   vals,
  output logic                  busy,
  output logic                  done,
  output logic                  found,
  output logic [W-1:0]          min_val,
  output logic [$clog2(N)-1:0]  min_idx
);
  logic [$clog2(N)-1:0] k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; found <= 1'b0;
      min_val <= '0; min_idx <= '0; k <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; found <= 1'b0; k <= '0;
        min_val <= '1; min_idx <= '0;
      end else if (busy) begin
        if (valid[k] && (!found || vals[k] < min_val)) begin
          found   <= 1'b1;
          min_val <= vals[k];
          min_idx <= k;
        end
        if (32'(k) == N - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end
endmodule
