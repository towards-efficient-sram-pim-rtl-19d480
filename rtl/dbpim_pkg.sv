// dbpim_pkg - shared sizes, types and the instruction encoding of the DB-PIM
// accelerator.
//
// Sizes that follow the paper: 4 PIM macros, 16 compartments of 16 dyadic block
// multiply units (DBMUs) each, 64 SRAM rows per DBMU (16 Kb per macro), groups of
// 16 INT8 input features, 9-bit signed CSD terms, and the four buffer capacities
// (128 KB feature, 16 KB instruction, 32 KB weight, 96 KB meta). The word widths
// of the buffers, the 32-bit accumulators and the instruction set are this
// design's own choices.
package dbpim_pkg;

  localparam int N_MACRO  = 4;    // PIM macros in the PIM core
  localparam int N_COMP   = 16;   // compartments per macro = inputs per group
  localparam int N_DBMU   = 16;   // DBMUs per compartment = post-processing units
  localparam int N_ROWS   = 64;   // SRAM cells per DBMU (SC #0 .. SC #63)
  localparam int ROW_AW   = 6;
  localparam int IN_W     = 8;    // INT8 input features
  localparam int IDX_W    = 3;    // bit index of an input column
  localparam int TERM_W   = 9;    // one signed CSD term (input bit x dyadic block)
  localparam int PAIR_W   = 10;   // sum of the two terms of one CSD adder
  localparam int TREE_W   = 13;   // sum of 16 terms
  localparam int X_W      = 14;   // tree sum plus the paired odd tree (phi_th = 2)
  localparam int ACC_W    = 32;   // partial sum and accumulator width

  localparam int WROW_W   = N_COMP * N_DBMU;        // 256 Q bits per macro row
  localparam int META_W   = 3;                      // sign + 2-bit DB index
  localparam int MROW_W   = WROW_W * META_W;        // 768 metadata bits per row
  localparam int GRP_W    = N_COMP * IN_W;          // 128-bit input group

  // buffer depths (capacity / word width)
  localparam int FB_DEPTH = 8192;  // 128 KB of 128-bit words
  localparam int IB_DEPTH = 4096;  //  16 KB of  32-bit words
  localparam int WB_DEPTH = 1024;  //  32 KB of 256-bit words
  localparam int MB_DEPTH = 1024;  //  96 KB of 768-bit words
  localparam int FB_AW = $clog2(FB_DEPTH);
  localparam int IB_AW = $clog2(IB_DEPTH);
  localparam int WB_AW = $clog2(WB_DEPTH);
  localparam int MB_AW = $clog2(MB_DEPTH);

  // metadata of one stored dyadic block
  typedef struct packed {
    logic       sign;   // 1: the block's non-zero digit is -1
    logic [1:0] idx;    // DB#0 .. DB#3 position inside the 8-bit weight
  } meta_t;

  // one bit column of an input group, as broadcast by the IPU to the PIM core
  typedef struct packed {
    logic              valid;
    logic              first;   // first column of the group
    logic              last;    // last column of the group
    logic [N_COMP-1:0] bits;    // bit idx of inputs 0..15
    logic [IDX_W-1:0]  idx;     // bit weight 2^idx
    logic              neg;     // sign bit of a signed input: weight -2^7
    logic [ROW_AW-1:0] row;     // macro row holding the weights for this group
  } col_t;

  // instruction set (32 bit, opcode in [31:28])
  typedef enum logic [3:0] {
    OP_HALT = 4'd0,  // stop, raise done
    OP_CFG  = 4'd1,  // [3:0] all DBMU pairs of macro m phi_th=2, [4] signed inputs, [5] ReLU, [10:6] shift
    OP_LDW  = 4'd2,  // [27:26] macro, [25:20] row, [19:13] rows, [9:0] weight-buffer address
    OP_LDM  = 4'd3,  // [27:26] macro, [25:20] row, [19:13] rows, [9:0] meta-buffer address
    OP_MAC  = 4'd4,  // [27:22] first row, [21:15] groups, [14] keep, [12:0] feature address
    OP_ST   = 4'd5,  // [12:0] feature address: 4 words, one per macro
    OP_PHI  = 4'd6   // [27:26] macro, [7:0] phi_th=2 mask, bit j for DBMUs 2j/2j+1
  } opcode_e;

endpackage
