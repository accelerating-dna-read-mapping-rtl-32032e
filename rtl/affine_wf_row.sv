// affine_wf_row: one affine WF instance of the affine WF buffer (read alignment).
//
// One instance holds three banded matrices D, M1 and M2 of 2*eth+1 = 13 cells of
// 5 bits each (195 bits) and computes them one cell per strobe, in the same
// in-place band order as the linear row (left = cell j-1 already updated, top =
// cell j+1 and top-left = cell j from the previous read base):
//   M1 = min(M1_top + w_ex, D_top + w_op + w_ex)      gap along the read
//   M2 = min(M2_left + w_ex, D_left + w_op + w_ex)    gap along the reference
//   D  = D_topleft                                    if the bases match
//   D  = min(M1, M2, D_topleft + w_sub)               otherwise
// with all weights 1 and every value saturating at 31. For each cell the origin of
// D (2 bits: match, substitution, M1, M2) and of M1 and M2 (1 bit each: extend or
// open) is written into a direction memory of RL x 13 x 4 bits, which stands for
// the seven direction rows of the instance; a read port lets the traceback walk it.
// Ties prefer substitution, then M1, then M2, and prefer extending a gap. Cells
// outside the band read as saturated. At `init` D is cleared to zero (as the linear
// buffer is) and M1, M2 are set to saturation: these start values are this design's
// choice. Interface as for linear_wf_row; the result is D[eth] after the last base.
module affine_wf_row
  import dp_pkg::*;
#(
  parameter int unsigned E    = ETH,
  parameter int unsigned SAT  = ETH_AFF,
  parameter int unsigned ROWS = RL          // read bases (direction memory depth)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      init,
  input  logic                      stb,
  input  logic [7:0]                i,
  input  logic [3:0]                j,
  input  base_t                     read_base,
  input  base_t                     ref_base,
  output logic [AFF_W-1:0]          wf_dist,
  // direction read port
  input  logic [7:0]                rd_i,
  input  logic [3:0]                rd_j,
  output logic [3:0]                rd_dir
);
  localparam int unsigned NB = 2 * E + 1;
  localparam logic [AFF_W-1:0] SATV = AFF_W'(SAT);

  logic [NB-1:0][AFF_W-1:0] d_q, m1_q, m2_q;
  logic [3:0] dirs [ROWS][NB];

  logic [AFF_W-1:0] top_d, top_m1, left_d, left_m2, diag_d;
  logic [AFF_W-1:0] m1_ext, m1_opn, m2_ext, m2_opn, m1_n, m2_n, sub_n, d_n;
  logic             m1_dir, m2_dir;
  logic [1:0]       d_dir;

  always_comb begin
    top_d   = (32'(j) != NB - 1) ? d_q[j+1]  : SATV;
    top_m1  = (32'(j) != NB - 1) ? m1_q[j+1] : SATV;
    left_d  = (j != 0) ? d_q[j-1]  : SATV;
    left_m2 = (j != 0) ? m2_q[j-1] : SATV;
    diag_d  = d_q[j];

    m1_ext = sat_add(top_m1, 1, SAT);
    m1_opn = sat_add(top_d, 2, SAT);
    m1_dir = (m1_opn < m1_ext);
    m1_n   = m1_dir ? m1_opn : m1_ext;

    m2_ext = sat_add(left_m2, 1, SAT);
    m2_opn = sat_add(left_d, 2, SAT);
    m2_dir = (m2_opn < m2_ext);
    m2_n   = m2_dir ? m2_opn : m2_ext;

    sub_n  = sat_add(diag_d, 1, SAT);
    if (read_base == ref_base) begin
      d_n = diag_d;  d_dir = 2'd0;
    end else if (sub_n <= m1_n && sub_n <= m2_n) begin
      d_n = sub_n;   d_dir = 2'd1;
    end else if (m1_n <= m2_n) begin
      d_n = m1_n;    d_dir = 2'd2;
    end else begin
      d_n = m2_n;    d_dir = 2'd3;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_q  <= '0;
      m1_q <= {NB{SATV}};
      m2_q <= {NB{SATV}};
    end else if (init) begin
      d_q  <= '0;
      m1_q <= {NB{SATV}};
      m2_q <= {NB{SATV}};
    end else if (stb) begin
      d_q[j]  <= d_n;
      m1_q[j] <= m1_n;
      m2_q[j] <= m2_n;
    end
  end

  // direction memory: {m2_dir, m1_dir, d_dir}
  always_ff @(posedge clk) begin
    if (stb && !init) dirs[i][j] <= {m2_dir, m1_dir, d_dir};
  end

  assign rd_dir = dirs[rd_i][rd_j];
  assign wf_dist   = d_q[E];
endmodule
