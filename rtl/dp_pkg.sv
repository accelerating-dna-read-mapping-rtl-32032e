// dp_pkg: constants and packet types shared by the read-mapping PIM blocks.
//
// The numbers below are the configuration evaluated for the accelerator: 150-base
// reads, 12-base minimizers, a linear error threshold of 6 (3-bit distances, a
// band of 2*6+1 = 13 cells), a saturation value of 31 for the affine distances
// (5-bit), and a 256 x 1024 crossbar split into a 160-row reads FIFO (three reads
// per row), a 32-row linear WF buffer and a 64-row affine WF buffer (eight
// instances of eight rows each). The per-cell cycle costs model the MAGIC NOR
// operation sequences: 37b+19 = 130 cycles for a 3-bit linear cell, and
// 1,288,281 / 1950 = 660 cycles for an affine cell (derived from the reported
// per-instance cycle count, not given per cell).
//
// Bases are 2-bit codes (A=0, C=1, G=2, T=3); this encoding is a design choice.
// Packet layouts (field widths of read IDs, genome locations and addresses) are
// also design choices; the 512-bit result word matches the 512-bit bus between
// the cores and the memory banks.
package dp_pkg;

  // read-mapping parameters
  localparam int unsigned RL        = 150;   // read length (bases)
  localparam int unsigned K         = 12;    // minimizer length (bases)
  localparam int unsigned ETH       = 6;     // linear error threshold
  localparam int unsigned ETH_AFF   = 31;    // affine saturation value
  localparam int unsigned BAND      = 2 * ETH + 1;           // 13 cells per row
  localparam int unsigned LIN_W     = 3;     // bits per linear distance
  localparam int unsigned AFF_W     = 5;     // bits per affine distance
  localparam int unsigned REF_BASES = 2 * (RL + ETH) - K;    // 300 bases = 600 bits
  localparam int unsigned WIN_BASES = RL + 2 * ETH;          // 162-base aligned window
  localparam int unsigned MINPOS    = RL - K + ETH;          // minimizer start in a segment

  // crossbar partition
  localparam int unsigned XB_ROWS       = 256;
  localparam int unsigned XB_COLS       = 1024;
  localparam int unsigned FIFO_ROWS     = 160;
  localparam int unsigned READS_PER_ROW = 3;
  localparam int unsigned LIN_ROWS      = 32;
  localparam int unsigned AFF_ROWS      = 64;
  localparam int unsigned AFF_ROWS_PER  = 8;                 // 1 distance row + 7 direction rows
  localparam int unsigned AFF_SLOTS     = AFF_ROWS / AFF_ROWS_PER;

  // MAGIC NOR cycle model
  localparam int unsigned CELL_CYC_LIN = 37 * LIN_W + 19;    // 130
  localparam int unsigned CELL_CYC_AFF = 660;

  // packet fields
  localparam int unsigned ID_W    = 32;
  localparam int unsigned PL_W    = 32;
  localparam int unsigned MIN_W   = 2 * K;                   // 24-bit minimizer
  localparam int unsigned POS_W   = 8;
  localparam int unsigned BUS_W   = 512;
  localparam int unsigned MAX_OPS = 216;
  localparam int unsigned NOPS_W  = 9;

  typedef logic [1:0] base_t;

  // edit operation codes of the traceback
  typedef enum logic [1:0] {OP_M = 2'd0, OP_X = 2'd1, OP_I = 2'd2, OP_D = 2'd3} op_t;

  // a read tagged with one of its minimizers and the minimizer's start position
  typedef struct packed {
    logic [ID_W-1:0]  id;
    logic [MIN_W-1:0] minimizer;
    logic [POS_W-1:0] pos;
    base_t [RL-1:0]   bases;
  } read_pkt_t;

  // a reads-FIFO entry (the minimizer is implied by the crossbar)
  typedef struct packed {
    logic [ID_W-1:0]  id;
    logic [POS_W-1:0] pos;
    base_t [RL-1:0]   bases;
  } fifo_entry_t;

  // offline indexing write of one reference segment into a linear WF buffer row
  typedef struct packed {
    logic [7:0]       chip;
    logic [9:0]       bank;
    logic [9:0]       xbar;
    logic [4:0]       row;
    logic [MIN_W-1:0] minimizer;
    logic [PL_W-1:0]  pl;      // genome location of segment base 0
    base_t [REF_BASES-1:0] seg;
  } ref_wr_t;

  // one alignment result, 512 bits
  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic [PL_W-1:0]   pl;
    logic [AFF_W-1:0]  wf_dist;
    logic [NOPS_W-1:0] nops;
    logic              trunc;
    logic              pad;
    logic [MAX_OPS-1:0][1:0] ops;   // ops[0] is the last alignment column
  } result_t;

  // commands from the main core
  typedef enum logic [1:0] {CMD_NONE = 2'd0, CMD_LIN_ITER = 2'd1, CMD_FLUSH = 2'd2} cmd_t;

  // sequencing strobes broadcast by a chip controller to all its crossbars
  typedef struct packed {
    logic       lin_load;    // step 2: copy FIFO head into the linear buffer
    logic       cell_stb;    // one WF cell (i, j) computed in all active rows
    logic       cell_aff;    // the strobe is for the affine buffer
    logic [7:0] cell_i;
    logic [3:0] cell_j;
    logic       lin_finish;  // steps 4 and 5
    logic       aff_load;    // start an affine iteration
    logic       aff_flush;   // ... also with a partly filled affine buffer
    logic       tb_start;    // traceback and step 7
  } seq_t;

  // status ORed up the hierarchy
  typedef struct packed {
    logic fifo_full;
    logic fifo_nonempty;
    logic aff_full;
    logic aff_nonempty;
    logic busy;
  } xstat_t;

  function automatic logic [LIN_W-1:0] lin_min(input logic [LIN_W-1:0] a, input logic [LIN_W-1:0] b);
    return (a < b) ? a : b;
  endfunction

  // saturating a + b, capped at cap
  function automatic logic [AFF_W-1:0] sat_add(input logic [AFF_W-1:0] a, input int unsigned b,
                                               input int unsigned cap);
    int unsigned s;
    s = int'(a) + b;
    return (s > cap) ? AFF_W'(cap) : AFF_W'(s);
  endfunction

endpackage
