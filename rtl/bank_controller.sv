// bank_controller: the controller of one bank of crossbars.
//
// A bank holds many crossbars, each owning one reference minimizer. The bank
// controller
//   - decodes indexing writes to the addressed crossbar (the bank row decoder's
//     role for the reference data),
//   - forwards a seeding read to every crossbar whose minimizer equals the read's
//     minimizer, so only relevant reads reach a crossbar; when several crossbars
//     share a minimizer the read goes to all of them in the same clock, and it is
//     held until all of them can accept it (a read with no matching crossbar is
//     accepted and dropped),
//   - drives the chip's sequencing strobes to all crossbars,
//   - ORs the crossbars' status flags upward, and
//   - selects one crossbar's result at a time (round robin) onto the bank's result
//     path (the bank column multiplexer's role).
// The design names this controller and its place but not its insides; the
// exact-match routing and the handshakes are this design's choice.
module bank_controller
  import dp_pkg::*;
#(
  parameter int unsigned NX = 512        // crossbars per bank
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // from the chip controller
  input  logic                 wr_valid,
  input  ref_wr_t              wr,
  input  logic                 rd_valid,
  input  read_pkt_t            rd,
  output logic                 rd_ready,
  input  seq_t                 seq_in,
  output xstat_t               stat,
  output logic                 res_valid,
  output result_t              res,
  input  logic                 res_ready,
  // to the crossbars
  output logic [NX-1:0]        xb_wr_valid,
  output ref_wr_t              xb_wr,
  input  logic [NX-1:0][MIN_W-1:0] xb_min,
  input  logic [NX-1:0]        xb_indexed,
  output logic [NX-1:0]        xb_rd_valid,
  output read_pkt_t            xb_rd,
  input  logic [NX-1:0]        xb_rd_ready,
  output seq_t                 xb_seq,
  input  xstat_t [NX-1:0]      xb_stat,
  input  logic [NX-1:0]        xb_res_valid,
  input  result_t [NX-1:0]     xb_res,
  output logic [NX-1:0]        xb_res_ready
);
  localparam int unsigned IW = (NX > 1) ? $clog2(NX) : 1;

  // indexing write decode
  always_comb begin
    xb_wr_valid = '0;
    if (wr_valid && 32'(wr.xbar) < NX) xb_wr_valid[IW'(wr.xbar)] = 1'b1;
  end
  assign xb_wr = wr;

  // read routing by exact minimizer match
  logic [NX-1:0] match;
  logic          all_ok;
  always_comb begin
    for (int unsigned x = 0; x < NX; x++)
      match[x] = xb_indexed[x] && (xb_min[x] == rd.minimizer);
    all_ok = &(~match | xb_rd_ready);
  end
  assign xb_rd_valid = (rd_valid && all_ok) ? match : '0;
  assign xb_rd       = rd;
  assign rd_ready    = all_ok;

  // sequencing strobes
  assign xb_seq = seq_in;

  // status
  always_comb begin
    stat = '0;
    for (int unsigned x = 0; x < NX; x++) stat = stat | xb_stat[x];
  end

  // result multiplexer
  logic [NX-1:0] grant;
  logic [IW-1:0] gidx;
  logic          gany;
  rr_arbiter #(.N(NX)) u_arb (
    .clk, .rst_n, .req(xb_res_valid), .advance(res_ready), .grant(grant), .idx(gidx), .any(gany)
  );
  assign res_valid    = gany;
  assign res          = xb_res[gidx];
  assign xb_res_ready = res_ready ? grant : '0;

  // a read offered downstream goes only to crossbars holding its minimizer
  a_route: assert property (@(posedge clk) disable iff (!rst_n) (xb_rd_valid & ~match) == '0);
endmodule
