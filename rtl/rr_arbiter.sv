// rr_arbiter: round-robin choice of one requester, used wherever results from
// several children share one upward path (crossbars in a bank, banks in a chip,
// chips in the module).
//
// `grant` is a combinational one-hot choice among `req`, searching from the
// requester after the last one served; `idx` is its index and `any` is set when
// some request is present. When `advance` is high (the chosen transfer completes)
// the search start moves past the granted requester. The round-robin policy is
// this design's choice; the design only says results are collected.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 req,
  input  logic                         advance,
  output logic [N-1:0]                 grant,
  output logic [(N>1?$clog2(N):1)-1:0] idx,
  output logic                         any
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr;

  always_comb begin
    grant = '0;
    idx   = '0;
    any   = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned c;
      c = (32'(ptr) + k) % N;
      if (!any && req[c]) begin
        any      = 1'b1;
        idx      = IW'(c);
        grant[c] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              ptr <= '0;
    else if (advance && any) ptr <= (32'(idx) == N - 1) ? '0 : idx + 1'b1;
  end
endmodule
