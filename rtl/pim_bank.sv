// pim_bank: one PIM-DRAM bank (the paper's Fig. 13), which holds one layer of
// the network.
//
// Blocks: N_SUB subarrays with compute rows; the multiplication sequencer,
// whose AAP stream is broadcast to all subarrays so every column of every
// subarray multiplies its operand pair at once; the column decoder (here a
// selector of the sensed row of one subarray); the reconfigurable adder tree;
// N_TAP accumulators; the special function units ReLU -> BatchNorm ->
// Quantize -> Pool (in the paper's order); the transpose unit; and the global
// buffer that faces the DRAM bus.
//
// Commands (cmd_valid/cmd, taken while cmd_ready):
//   BK_MUL  multiply: operands at a_base/b_base, product at p_base, scratch
//           rows at i_base, in every subarray.
//   BK_ADD  add the operands at a_base/b_base into p_base (residual additions
//           of a reserved bank).
//   BK_MAC  reduce: for each subarray s = sub_first..n_sub and each
//           accumulator group g = grp_first..n_groups, sense product rows p_base .. p_base+2n-1 one per
//           clock, let the adder tree sum the columns and the accumulators
//           shift-add the sums (bit b is shifted by b); then stream the N_TAP
//           MAC results through the SFUs into the transpose unit, one per
//           clock. Group g taps units g*N_TAP .. g*N_TAP+N_TAP-1 of level
//           tap_level of the tree. A layer whose results do not fit the
//           transpose unit at once is reduced in several MACs over different
//           groups, with a SEND and a transfer after each (the paper's "the
//           adder works on the remaining MACs" after the transfers); the
//           products stay in the subarrays, so no new MUL is needed.
//   BK_SEND read the N_BITS bit planes of the transpose unit (vertical reads)
//           into the global buffer, for the DRAM bus to carry to the next bank,
//           and restart the transpose write pointer.
// done pulses when a command has finished.
//
// Adder-tree configuration: the mapping places the operand pairs of one MAC
// in mac_size consecutive columns of a block of 2^tap_level columns. Leaves
// beyond mac_size in each block are masked off, and a unit whose right input
// covers only masked columns forwards its left input instead of adding. The
// alignment of MACs to power-of-two blocks is this design's choice; the paper
// packs MACs back to back and does not say how the tree separates them.
//
// Timing: MUL takes the sequencer's AAP count; MAC takes, per group,
// 2*N_BITS + 2 clocks of reduction plus one clock per valid tap, then four
// clocks for the SFU pipeline to drain; SEND takes about N_BITS + 2 clocks.
//
// Lint notes: the register c keeps the whole command, but the MUL/ADD row
// bases go straight from cmd to the sequencer when it starts, so those fields
// of c are unused. rst_n is both the asynchronous reset and the disable condition
// of the assertions, which some linters report as mixed sync/async use.
//
// External row writes (wr_*) come from the DRAM bus: the host loading
// operands, or RowClone from another bank. gb_* is the global buffer head
// offered to the bus.
module pim_bank
  import pim_pkg::*;
#(
  parameter int unsigned N_SUB    = 8,
  parameter int unsigned ROWS     = 4096,
  parameter int unsigned COLS     = 4096,
  parameter int unsigned N_BITS   = 4,
  parameter int unsigned N_TAP    = 16,
  parameter int unsigned TR_DEPTH = 256,
  parameter int unsigned TR_WIDTH = 8,
  parameter int unsigned GB_DEPTH = 8,
  localparam int unsigned LEVELS = $clog2(COLS),
  localparam int unsigned SW     = LEVELS + 1,
  localparam int unsigned ACC_W  = SW + 2 * N_BITS,
  localparam int unsigned SFU_W  = 24,
  localparam int unsigned SUBW   = (N_SUB > 1) ? $clog2(N_SUB) : 1,
  localparam int unsigned TAW    = $clog2(TR_DEPTH),
  localparam int unsigned GAW    = $clog2(GB_DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                cmd_valid,
  input  bank_cmd_t           cmd,
  output logic                cmd_ready,
  output logic                done,
  input  sfu_cfg_t            sfu_cfg,
  // row writes from the DRAM bus
  input  logic                wr_en,
  input  logic [7:0]          wr_sub,
  input  logic [ROW_AW-1:0]   wr_row,
  input  logic [7:0]          wr_seg,
  input  logic [TR_DEPTH-1:0] wr_data,
  // global buffer towards the DRAM bus
  output logic [TR_DEPTH-1:0] gb_head,
  output logic                gb_empty,
  input  logic                gb_pop,
  // status
  output logic [15:0]         aap_count,
  output logic [15:0]         results,     // values written to the transpose unit since the last SEND
  output logic [15:0]         forwards     // tree units in forward mode under the current MAC configuration
);

  // ------------------------------------------------------------ controller
  typedef enum logic [3:0] {
    B_IDLE, B_SEQ, B_RED, B_RED_LAST, B_DRAIN, B_FLUSH, B_SEND, B_SEND_PUSH, B_DONE
  } bstate_e;

  bstate_e          st;
  bank_cmd_t        c;
  logic [3:0]       sub_i;
  logic [7:0]       grp;
  logic [$clog2(2*N_BITS+1)-1:0] bit_i;
  logic [$clog2(N_TAP+1)-1:0]    tap_i;
  logic [2:0]       flush_cnt;
  logic [$clog2(TR_WIDTH+1)-1:0] plane;
  logic             acc_v;       // a sensed row is in the row buffer
  logic [SUBW-1:0]  sub_r;       // subarray of the sensed row

  // sequencer
  logic      seq_start, seq_valid, seq_busy, seq_done;
  aap_cmd_t  seq_cmd;

  pim_mul_seq #(.N_BITS(N_BITS)) u_seq (
    .clk, .rst_n, .start(seq_start),
    .mode(cmd.op == BK_ADD ? SEQ_ADD : SEQ_MUL),
    .a_base(cmd.a_base), .b_base(cmd.b_base), .p_base(cmd.p_base), .i_base(cmd.i_base),
    .cmd_valid(seq_valid), .cmd(seq_cmd), .busy(seq_busy), .done(seq_done), .aap_count);

  // ------------------------------------------------------------ subarrays
  logic              rd_en;
  logic [ROW_AW-1:0] rd_row;
  logic [COLS-1:0]   sa_rd [N_SUB];

  for (genvar s = 0; s < N_SUB; s++) begin : g_sub
    pim_subarray #(.ROWS(ROWS), .COLS(COLS), .SEG_W(TR_DEPTH)) u_sa (
      .clk, .rst_n, .cmd_valid(seq_valid), .cmd(seq_cmd),
      .rd_en, .rd_row, .rd_data(sa_rd[s]),
      .wr_en(wr_en && wr_sub == 8'(s)), .wr_row, .wr_seg, .wr_data);
  end

  // column decoder: the sensed row of the selected subarray
  logic [COLS-1:0] row_buf;
  assign row_buf = sa_rd[sub_r];

  // ------------------------------------------------------------ adder tree
  logic [COLS-1:0]           leaf_en;
  logic [COLS-2:0]           node_add;
  logic [N_TAP-1:0][SW-1:0]  tap_sum;
  logic [LEVELS-1:0]         tap_base;
  logic [12:0]               blk_mask;   // 2^tap_level - 1

  assign blk_mask = 13'((1 << c.tap_level) - 1);

  for (genvar i = 0; i < COLS; i++) begin : g_leafcfg
    assign leaf_en[i] = (13'(i) & blk_mask) < c.mac_size;
  end
  for (genvar l = 1; l <= LEVELS; l++) begin : g_nodecfg
    localparam int unsigned NN  = COLS >> l;
    localparam int unsigned OFS = COLS - (COLS >> (l - 1));
    for (genvar j = 0; j < NN; j++) begin : g_n
      // first column under the right input, relative to its 2^L block
      localparam int unsigned RSTART = j * (1 << l) + (1 << (l - 1));
      assign node_add[OFS + j] = !((4'(l) <= c.tap_level) &&
                                   ((13'(RSTART) & blk_mask) >= c.mac_size));
    end
  end

  always_comb begin
    forwards = '0;
    for (int i = 0; i < int'(COLS) - 1; i++) forwards = forwards + 16'(!node_add[i]);
  end

  assign tap_base = LEVELS'(grp) * LEVELS'(N_TAP);

  pim_adder_tree #(.N_IN(COLS), .N_TAP(N_TAP)) u_tree (
    .leaf(row_buf), .leaf_en, .node_add, .tap_level(c.tap_level[$clog2(LEVELS+1)-1:0]),
    .tap_base, .tap_sum);

  // ------------------------------------------------------------ accumulators
  logic                        acc_clear;
  logic [N_TAP-1:0][ACC_W-1:0] acc;
  logic [N_TAP-1:0]            acc_done;

  for (genvar t = 0; t < N_TAP; t++) begin : g_acc
    pim_accumulator #(.IN_W(SW), .N_BITS(N_BITS)) u_acc (
      .clk, .rst_n, .clear(acc_clear), .in_valid(acc_v), .in_sum(tap_sum[t]),
      .acc(acc[t]), .done(acc_done[t]));
  end

  // number of valid taps in this group
  logic [LEVELS:0] n_nodes;
  logic [LEVELS:0] n_valid;
  always_comb begin
    n_nodes = (LEVELS+1)'(COLS >> c.tap_level);
    if ((LEVELS+1)'(tap_base) >= n_nodes)                         n_valid = '0;
    else if (n_nodes - (LEVELS+1)'(tap_base) > (LEVELS+1)'(N_TAP)) n_valid = (LEVELS+1)'(N_TAP);
    else                                                           n_valid = n_nodes - (LEVELS+1)'(tap_base);
  end

  // ------------------------------------------------------------ SFUs
  logic                     sfu_in_v;
  logic signed [SFU_W-1:0]  sfu_in;
  logic                     relu_v, bn_v, q_v, pool_v;
  logic signed [SFU_W-1:0]  relu_d, bn_d;
  logic [N_BITS-1:0]        q_d, pool_d;

  assign sfu_in = SFU_W'(acc[tap_i[$clog2(N_TAP)-1:0]]);

  pim_relu #(.W(SFU_W)) u_relu (.clk, .rst_n, .in_valid(sfu_in_v), .in_data(sfu_in),
    .out_valid(relu_v), .out_data(relu_d));
  pim_batchnorm #(.W(SFU_W), .SC(16)) u_bn (.clk, .rst_n, .in_valid(relu_v), .in_data(relu_d),
    .mean(sfu_cfg.bn_mean), .scale(sfu_cfg.bn_scale), .shift(sfu_cfg.bn_shift), .beta(sfu_cfg.bn_beta),
    .out_valid(bn_v), .out_data(bn_d));
  pim_quantize #(.W(SFU_W), .N_BITS(N_BITS)) u_q (.clk, .rst_n, .in_valid(bn_v), .in_data(bn_d),
    .qshift(sfu_cfg.q_shift), .out_valid(q_v), .out_data(q_d));
  pim_pool #(.W(N_BITS)) u_pool (.clk, .rst_n, .enable(sfu_cfg.pool_en), .window(sfu_cfg.pool_window),
    .clear(st == B_IDLE && cmd_valid && cmd.op == BK_MAC),
    .in_valid(q_v), .in_data(q_d), .out_valid(pool_v), .out_data(pool_d));

  // ------------------------------------------------------------ transpose + global buffer
  logic [TAW-1:0]      tr_wp;
  logic                tr_rd;
  logic [TR_DEPTH-1:0] tr_plane;
  logic                gb_full;
  logic [GAW:0]        gb_count;
  logic [TR_WIDTH-1:0] tr_rh_unused;   // horizontal read port, not used by the bank

  pim_transpose #(.DEPTH(TR_DEPTH), .WIDTH(TR_WIDTH)) u_tr (
    .clk, .wr_en(pool_v), .wr_addr(tr_wp), .wr_data(TR_WIDTH'(pool_d)),
    .rd_en(tr_rd), .rd_bit(plane[$clog2(TR_WIDTH)-1:0]), .rd_data(tr_plane),
    .wv_en(1'b0), .wv_bit('0), .wv_data('0), .rh_en(1'b0), .rh_addr('0), .rh_data(tr_rh_unused));

  pim_global_buffer #(.W(TR_DEPTH), .DEPTH(GB_DEPTH)) u_gb (
    .clk, .rst_n, .push(st == B_SEND_PUSH), .push_data(tr_plane), .pop(gb_pop),
    .head(gb_head), .empty(gb_empty), .full(gb_full), .count(gb_count));

  // ------------------------------------------------------------ control
  assign cmd_ready = (st == B_IDLE);
  assign seq_start = (st == B_IDLE) && cmd_valid && (cmd.op == BK_MUL || cmd.op == BK_ADD);
  assign rd_en     = (st == B_RED);
  assign rd_row    = c.p_base + ROW_AW'(bit_i);
  assign acc_clear = (st == B_IDLE) || (st == B_DRAIN && tap_i == n_valid[$clog2(N_TAP+1)-1:0]);
  assign sfu_in_v  = (st == B_DRAIN) && ((LEVELS+1)'(tap_i) < n_valid);
  assign tr_rd     = (st == B_SEND) && !gb_full && gb_count < (GAW+1)'(GB_DEPTH - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= B_IDLE; c <= '0; sub_i <= '0; grp <= '0; bit_i <= '0; tap_i <= '0;
      flush_cnt <= '0; plane <= '0; acc_v <= 1'b0; sub_r <= '0; done <= 1'b0;
      tr_wp <= '0; results <= '0;
    end else begin
      done  <= 1'b0;
      acc_v <= rd_en;
      if (rd_en) sub_r <= SUBW'(sub_i);
      if (pool_v) begin tr_wp <= tr_wp + 1'b1; results <= results + 16'd1; end
      unique case (st)
        B_IDLE: if (cmd_valid) begin
          c <= cmd; sub_i <= cmd.sub_first; grp <= cmd.grp_first; bit_i <= '0; tap_i <= '0; plane <= '0;
          unique case (cmd.op)
            BK_MUL, BK_ADD: st <= B_SEQ;
            BK_MAC:         st <= B_RED;
            default:        st <= B_SEND;
          endcase
        end
        B_SEQ: if (seq_done) st <= B_DONE;
        B_RED: begin
          if (bit_i == ($bits(bit_i))'(2 * N_BITS - 1)) st <= B_RED_LAST;
          else bit_i <= bit_i + 1'b1;
        end
        B_RED_LAST: begin tap_i <= '0; st <= B_DRAIN; end
        B_DRAIN: begin
          if (tap_i == n_valid[$clog2(N_TAP+1)-1:0]) begin
            bit_i <= '0; tap_i <= '0;
            if (grp != c.n_groups) begin grp <= grp + 1'b1; st <= B_RED; end
            else if (sub_i != c.n_sub) begin grp <= c.grp_first; sub_i <= sub_i + 1'b1; st <= B_RED; end
            else begin flush_cnt <= '0; st <= B_FLUSH; end
          end else tap_i <= tap_i + 1'b1;
        end
        B_FLUSH: begin
          flush_cnt <= flush_cnt + 1'b1;
          if (flush_cnt == 3'd5) st <= B_DONE;
        end
        B_SEND: if (tr_rd) st <= B_SEND_PUSH;
        B_SEND_PUSH: begin
          if (plane == ($bits(plane))'(N_BITS - 1)) begin
            tr_wp <= '0; results <= '0; st <= B_DONE;
          end else begin plane <= plane + 1'b1; st <= B_SEND; end
        end
        B_DONE: begin done <= 1'b1; st <= B_IDLE; end
        default: st <= B_IDLE;
      endcase
    end
  end

  // A command is only given to an idle bank.
  a_cmd_idle: assert property (@(posedge clk) disable iff (!rst_n) cmd_valid |-> cmd_ready)
    else $error("bank busy");
  // The sequencer runs for as long as the bank waits for it.
  a_seq_busy: assert property (@(posedge clk) disable iff (!rst_n) st == B_SEQ && !seq_done |-> seq_busy)
    else $error("sequencer stopped early");
  // Every accumulator has all 2n bit sums when its result goes to the SFUs.
  a_acc_done: assert property (@(posedge clk) disable iff (!rst_n) sfu_in_v |-> &acc_done)
    else $error("MAC read before the accumulators finished");

endmodule
