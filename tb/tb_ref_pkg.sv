// tb_ref_pkg: reference models for the testbenches.
//
// The models work on the full 2-D matrix in read/window coordinates (row r = read
// base, column c = window base) instead of the hardware's in-place band buffer,
// so they check the band bookkeeping of the RTL rather than repeat it. Band cell j
// of row r is column c = r + j; row -1 holds zeros for columns -1 .. 2E-1.
// Also: a test-case generator that derives a read from a window with random
// substitutions, insertions and deletions, and a checker that replays a traceback
// against the read and window and recomputes its affine cost.
package tb_ref_pkg;
  import dp_pkg::*;

  localparam int INF  = 1000;
  localparam int MAXR = 160;
  localparam int MAXC = 180;

  typedef base_t read_a [RL];
  typedef base_t win_a  [WIN_BASES];

  // ----- linear banded WF -----
  function automatic int lin_model(input read_a rd, input win_a wn, input int n, input int e);
    int d [MAXR][MAXC];     // index r+1, c+1
    for (int r = 0; r < MAXR; r++) for (int c = 0; c < MAXC; c++) d[r][c] = INF;
    for (int c = -1; c <= 2*e-1; c++) d[0][c+1] = 0;
    for (int r = 0; r < n; r++) begin
      for (int c = r; c <= r + 2*e; c++) begin
        int best, t;
        best = d[r][c] + ((rd[r] != wn[c]) ? 1 : 0);              // diag (r-1, c-1)
        if (c - r <= 2*e - 1) begin t = d[r][c+1] + 1; if (t < best) best = t; end  // top
        if (c - r >= 1)       begin t = d[r+1][c] + 1; if (t < best) best = t; end  // left
        d[r+1][c+1] = (best > e + 1) ? e + 1 : best;
      end
    end
    return d[n][n-1+e+1];
  endfunction

  // ----- affine banded WF with directions -----
  int ad  [MAXR][MAXC];
  int am1 [MAXR][MAXC];
  int am2 [MAXR][MAXC];
  int adir[MAXR][MAXC];   // {m2, m1, d[1:0]} of cell (r, c) at [r][c+1]

  function automatic int sat(input int v, input int s);
    return (v > s) ? s : v;
  endfunction

  function automatic int aff_model(input read_a rd, input win_a wn, input int n, input int e,
                                   input int s);
    for (int r = 0; r < MAXR; r++) for (int c = 0; c < MAXC; c++) begin
      ad[r][c] = s; am1[r][c] = s; am2[r][c] = s; adir[r][c] = 0;
    end
    for (int c = -1; c <= 2*e-1; c++) ad[0][c+1] = 0;
    for (int r = 0; r < n; r++) begin
      for (int c = r; c <= r + 2*e; c++) begin
        int td, tm1, ld, lm2, dg, m1e, m1o, m2e, m2o, m1, m2, sb, dv, dd, b1, b2;
        dg  = ad[r][c];
        td  = (c - r <= 2*e - 1) ? ad[r][c+1]  : s;
        tm1 = (c - r <= 2*e - 1) ? am1[r][c+1] : s;
        ld  = (c - r >= 1) ? ad[r+1][c]  : s;
        lm2 = (c - r >= 1) ? am2[r+1][c] : s;
        m1e = sat(tm1 + 1, s); m1o = sat(td + 2, s);
        b1  = (m1o < m1e); m1 = b1 ? m1o : m1e;
        m2e = sat(lm2 + 1, s); m2o = sat(ld + 2, s);
        b2  = (m2o < m2e); m2 = b2 ? m2o : m2e;
        sb  = sat(dg + 1, s);
        if (rd[r] == wn[c])          begin dv = dg; dd = 0; end
        else if (sb <= m1 && sb <= m2) begin dv = sb; dd = 1; end
        else if (m1 <= m2)           begin dv = m1; dd = 2; end
        else                         begin dv = m2; dd = 3; end
        ad[r+1][c+1] = dv; am1[r+1][c+1] = m1; am2[r+1][c+1] = m2;
        adir[r][c+1] = (b2 << 3) | (b1 << 2) | dd;
      end
    end
    return ad[n][n-1+e+1];
  endfunction

  // direction of band cell (r, j) from the last aff_model run
  function automatic logic [3:0] aff_dir(input int r, input int j);
    return 4'(adir[r][r+j+1]);
  endfunction

  // ----- traceback replay -----
  // ops[0] is the last column. Returns the recomputed affine cost, or -1 if the
  // ops do not consume exactly n read bases or a M/X op disagrees with the bases.
  function automatic int replay_cost(input read_a rd, input win_a wn, input int n, input int e,
                                     input logic [MAX_OPS-1:0][1:0] ops, input int nops);
    int r, c, cost;
    logic in_i, in_d;
    r = n - 1; c = n - 1 + e; cost = 0; in_i = 0; in_d = 0;
    for (int k = 0; k < nops; k++) begin
      unique case (ops[k])
        2'd0: begin if (r < 0 || c < 0 || rd[r] != wn[c]) return -1; r--; c--; in_i = 0; in_d = 0; end
        2'd1: begin if (r < 0 || c < 0 || rd[r] == wn[c]) return -1; cost++; r--; c--; in_i = 0; in_d = 0; end
        2'd2: begin cost += in_i ? 1 : 2; in_i = 1; in_d = 0; r--; end
        default: begin cost += in_d ? 1 : 2; in_d = 1; in_i = 0; c--; end
      endcase
    end
    if (r != -1) return -1;
    return cost;
  endfunction

  // ----- test case generator -----
  // read = window[E ..] with random edits applied, cut to RL bases
  function automatic void mutate(input win_a wn, input int nsub, input int nins, input int ndel,
                                 output read_a rd);
    base_t q[$];
    for (int c = ETH; c < WIN_BASES; c++) q.push_back(wn[c]);
    for (int k = 0; k < ndel; k++) q.delete($urandom_range(100, 10));
    for (int k = 0; k < nins; k++) q.insert($urandom_range(100, 10), base_t'($urandom_range(3)));
    for (int k = 0; k < nsub; k++) begin
      int p; p = $urandom_range(RL - 1);
      q[p] = q[p] + 2'd1;
    end
    for (int r = 0; r < RL; r++) rd[r] = q[r];
  endfunction

  function automatic void make_case(output read_a rd, output win_a wn, input int nsub,
                                    input int nins, input int ndel);
    for (int c = 0; c < WIN_BASES; c++) wn[c] = base_t'($urandom_range(3));
    mutate(wn, nsub, nins, ndel, rd);
  endfunction
endpackage
