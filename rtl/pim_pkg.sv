// pim_pkg: types and constants shared by the PIM-DRAM blocks.
//
// An in-subarray operation is one ACTIVATE-ACTIVATE-PRECHARGE (AAP). Each AAP
// is described by an aap_cmd_t: the kind of multi-row activation, the source
// row it senses (for a copy) and the rows the sensed value is restored into.
// The nine compute rows follow the paper (A, A-1, B, B-1, Cin, Cin-1, Cout,
// Cout-1, row0); the numeric encoding of operations and rows is this design's
// own choice.
package pim_pkg;

  // Width of every row address field (covers 4096 data rows).
  localparam int unsigned ROW_AW = 16;

  // Compute rows of a subarray, in the order the paper lists them.
  typedef enum logic [3:0] {
    CR_A    = 4'd0,
    CR_A1   = 4'd1,   // "A-1"
    CR_B    = 4'd2,
    CR_B1   = 4'd3,   // "B-1"
    CR_CIN  = 4'd4,
    CR_CIN1 = 4'd5,   // "Cin-1"
    CR_COUT = 4'd6,   // dual-contact cell, read through its negated port
    CR_COUT1= 4'd7,   // "Cout-1", second dual-contact cell
    CR_ROW0 = 4'd8    // holds zeros
  } crow_e;
  localparam int unsigned NCR = 9;

  // One-hot masks of compute rows.
  localparam logic [NCR-1:0] M_A    = 9'b0_0000_0001;
  localparam logic [NCR-1:0] M_A1   = 9'b0_0000_0010;
  localparam logic [NCR-1:0] M_B    = 9'b0_0000_0100;
  localparam logic [NCR-1:0] M_B1   = 9'b0_0000_1000;
  localparam logic [NCR-1:0] M_CIN  = 9'b0_0001_0000;
  localparam logic [NCR-1:0] M_CIN1 = 9'b0_0010_0000;
  localparam logic [NCR-1:0] M_COUT = 9'b0_0100_0000;
  localparam logic [NCR-1:0] M_COUT1= 9'b0_1000_0000;
  localparam logic [NCR-1:0] M_ROW0 = 9'b1_0000_0000;

  // Kinds of AAP.
  typedef enum logic [2:0] {
    AAP_NOP   = 3'd0,
    AAP_COPY  = 3'd1,  // RowClone: sense src, restore into destinations
    AAP_AND_A = 3'd2,  // AND-WL of pair (A, A-1); result restored in A, A-1
    AAP_AND_B = 3'd3,  // AND-WL of pair (B, B-1); result restored in B, B-1
    AAP_MAJ3  = 3'd4,  // triple-row activation A, B, Cin: carry
    AAP_MAJ5  = 3'd5   // A-1, B-1, Cin-1, Cout', Cout-1': sum
  } aap_op_e;

  typedef struct packed {
    aap_op_e             op;
    logic                src_is_cr;  // source is a compute row
    crow_e               src_cr;
    logic [ROW_AW-1:0]   src_row;    // source data row
    logic                dst_en;     // also restore into a data row
    logic [ROW_AW-1:0]   dst_row;
    logic [NCR-1:0]      dst_cr;     // compute rows also written
  } aap_cmd_t;

  localparam aap_cmd_t AAP_IDLE = '{op: AAP_NOP, src_is_cr: 1'b0, src_cr: CR_A,
                                    src_row: '0, dst_en: 1'b0, dst_row: '0, dst_cr: '0};

  // Operation of the multiplication sequencer.
  typedef enum logic {SEQ_MUL = 1'b0, SEQ_ADD = 1'b1} seq_mode_e;

  // Bank-level commands.
  typedef enum logic [1:0] {
    BK_MUL  = 2'd0,  // in-subarray multiply in every subarray
    BK_ADD  = 2'd1,  // in-subarray add in every subarray (residual bank)
    BK_MAC  = 2'd2,  // adder tree, accumulators, SFUs, transpose
    BK_SEND = 2'd3   // transposed bit planes into the global buffer
  } bank_op_e;

  typedef struct packed {
    bank_op_e            op;
    logic [ROW_AW-1:0]   a_base;     // MUL/ADD: operand A bit 0
    logic [ROW_AW-1:0]   b_base;     // MUL/ADD: operand B bit 0
    logic [ROW_AW-1:0]   p_base;     // MUL/ADD/MAC: product bit 0
    logic [ROW_AW-1:0]   i_base;     // MUL: intermediate rows
    logic [3:0]          n_sub;      // MAC: last subarray reduced
    logic [3:0]          tap_level;  // MAC: adder-tree level wired to the accumulators
    logic [7:0]          n_groups;   // MAC: last accumulator group of each subarray
    logic [12:0]         mac_size;   // MAC: columns used in each 2^tap_level block
    logic [3:0]          sub_first;  // MAC: first subarray reduced
    logic [7:0]          grp_first;  // MAC: first accumulator group of each subarray
  } bank_cmd_t;

  // Constants of the special function units of one bank.
  typedef struct packed {
    logic signed [23:0]  bn_mean;
    logic signed [15:0]  bn_scale;
    logic [4:0]          bn_shift;
    logic signed [23:0]  bn_beta;
    logic [4:0]          q_shift;
    logic                pool_en;
    logic [7:0]          pool_window;
  } sfu_cfg_t;

  // Inter-bank transfer of one source bank over the DRAM bus.
  typedef struct packed {
    logic                en;        // this bank sends its global buffer
    logic [3:0]          dst_bank;
    logic [7:0]          dst_sub;
    logic [ROW_AW-1:0]   dst_row;   // row of bit plane 0 in the destination
    logic [7:0]          dst_seg;   // column segment in the destination
  } xfer_cfg_t;

endpackage
