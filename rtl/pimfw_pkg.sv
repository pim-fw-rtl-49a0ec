// pimfw_pkg: types and constants shared by the PIM Floyd-Warshall stack.
//
// The datapath word is 32 bits (the bank PE works on 32-bit operands, and
// a distance of all ones stands for "no edge", i.e. infinity). Commands
// travel from the memory controller to the channels, bank-groups and banks
// as one struct, pim_cmd_t; each level picks the fields it needs. The field
// widths are fixed maxima here (a struct in a package cannot follow module
// parameters); every module uses only the low bits it needs. The opcode set
// and the struct layout are this design's own choice: the source describes
// "specialized commands" from the controller but not their encoding.
package pimfw_pkg;

  localparam int unsigned WORD_W   = 32;             // distance word
  localparam logic [WORD_W-1:0] INF = '1;             // unreachable

  // Field widths of a command (maxima).
  localparam int unsigned MASK_W   = 64;  // one bit per bank-group in the stack
  localparam int unsigned IDX_W    = 8;   // channel / bank-group / bank index
  localparam int unsigned ROW_W    = 16;  // DRAM row address
  localparam int unsigned COLI_W   = 8;   // column (COL_BITS wide) index in a row
  localparam int unsigned SLOT_W   = 8;   // word index inside a BPE slice
  localparam int unsigned WIDX_W   = 8;   // word index into the data buffer

  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_ACT      = 4'd1,  // open a row in every bank of the selected bank-groups
    OP_PRE      = 4'd2,  // write the row buffer back and close the row
    OP_WR       = 4'd3,  // write one column of a bank's open row
    OP_RD       = 4'd4,  // read one column of a bank's open row
    OP_BCAST_KJ = 4'd5,  // broadcast a pivot-row vector (one word per BPE)
    OP_BCAST_IK = 4'd6,  // broadcast one column into the data buffers
    OP_MINPLUS  = 4'd7,  // every BPE: D_ij = min(D_ij, D_ik + D_kj)
    OP_REDUCE   = 4'd8,  // minimum of one word over bank-groups and channels
    OP_FW       = 4'd9   // run the whole blocked Floyd-Warshall (scheduler)
  } pim_op_e;

  typedef struct packed {
    pim_op_e              op;
    logic [MASK_W-1:0]    dst_mask;  // bank-group g = ch*G + bg
    logic [IDX_W-1:0]     src_ch;    // source channel (RD, BCAST)
    logic [IDX_W-1:0]     src_bg;    // source bank-group (RD, BCAST)
    logic [IDX_W-1:0]     bank;      // bank inside a bank-group (WR, RD, BCAST_IK, REDUCE)
    logic [ROW_W-1:0]     row;       // ACT row
    logic [COLI_W-1:0]    col;       // WR / RD / BCAST_IK column, REDUCE word
    logic [SLOT_W-1:0]    slot;      // BCAST_KJ / MINPLUS slot; OP_FW: tiles per row M
    logic [WIDX_W-1:0]    widx;      // MINPLUS: data-buffer word; BCAST_IK: buffer entry
  } pim_cmd_t;

endpackage
