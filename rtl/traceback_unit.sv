// traceback_unit: recovers the alignment of one affine WF instance.
//
// After the affine matrices are computed, the unit walks the stored directions
// from the end cell (last read base, band centre) back to the start and packs the
// edit operations into a 512-bit result word together with the read ID, the
// genome location and the affine distance; this word is what a crossbar sends to
// the main core. One direction is read per clock:
//   in D : match -> emit M, go to the top-left cell; substitution -> emit X, top-left;
//          M1 -> continue in M1 at the same cell; M2 -> continue in M2
//   in M1: emit I (read base against a gap), go to the top cell (band j+1), and
//          return to D if the gap was opened there
//   in M2: emit D (reference base against a gap), go to the left cell (band j-1),
//          and return to D if the gap was opened there
// The walk ends when it leaves the first read base. It also ends, flagging
// `trunc`, if it would leave the band or exceed MAX_OPS operations. ops[0] is the
// last alignment column. The storage of directions follows the design; the walk
// and the packing are this design's choice, as the design only states that the
// traceback is recovered in the crossbar.
//
// Interface: pulse `start` with the instance's ID, location and distance; the unit
// drives `rd_i`/`rd_j` and reads `rd_dir` combinationally; `done` pulses with
// `result` valid from then until the next start.
module traceback_unit
  import dp_pkg::*;
#(
  parameter int unsigned E    = ETH,
  parameter int unsigned ROWS = RL
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [ID_W-1:0]  id,
  input  logic [PL_W-1:0]  pl,
  input  logic [AFF_W-1:0] wf_dist,
  output logic [7:0]       rd_i,
  output logic [3:0]       rd_j,
  input  logic [3:0]       rd_dir,
  output logic             busy,
  output logic             done,
  output result_t          result
);
  localparam int unsigned NB = 2 * E + 1;
  typedef enum logic [1:0] {ST_D, ST_M1, ST_M2} mat_t;

  mat_t        mat;
  logic [8:0]  ci;      // read index + 1 (0 means the walk left the first base)
  logic [3:0]  cj;
  logic [NOPS_W-1:0] n;

  assign rd_i = 8'(ci - 9'd1);
  assign rd_j = cj;

  task automatic emit(input op_t op);
    result.ops[n] <= op;
    n <= n + 1'b1;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      mat    <= ST_D;
      ci     <= '0;
      cj     <= '0;
      n      <= '0;
      result <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy          <= 1'b1;
        mat           <= ST_D;
        ci            <= 9'(ROWS);
        cj            <= 4'(E);
        n             <= '0;
        result        <= '0;
        result.id     <= id;
        result.pl     <= pl;
        result.wf_dist   <= wf_dist;
      end else if (busy) begin
        if (ci == 0 || 32'(n) == MAX_OPS) begin
          busy         <= 1'b0;
          done         <= 1'b1;
          result.nops  <= n;
          result.trunc <= (ci != 0);
        end else begin
          unique case (mat)
            ST_D: begin
              unique case (rd_dir[1:0])
                2'd0: begin emit(OP_M); ci <= ci - 1'b1; end
                2'd1: begin emit(OP_X); ci <= ci - 1'b1; end
                2'd2: mat <= ST_M1;
                default: mat <= ST_M2;
              endcase
            end
            ST_M1: begin
              if (32'(cj) == NB - 1) begin
                busy <= 1'b0; done <= 1'b1; result.nops <= n; result.trunc <= 1'b1;
              end else begin
                emit(OP_I);
                ci <= ci - 1'b1;
                cj <= cj + 1'b1;
                if (rd_dir[2]) mat <= ST_D;
              end
            end
            default: begin
              if (cj == 0) begin
                busy <= 1'b0; done <= 1'b1; result.nops <= n; result.trunc <= 1'b1;
              end else begin
                emit(OP_D);
                cj <= cj - 1'b1;
                if (rd_dir[3]) mat <= ST_D;
              end
            end
          endcase
        end
      end
    end
  end
endmodule
