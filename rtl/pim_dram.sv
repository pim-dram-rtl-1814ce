// pim_dram: top of the PIM-DRAM design, N_BANKS processing banks on the
// DRAM-internal bus.
//
// Each network layer is held by one bank (pim_bank): its weights and input
// activations sit bit-transposed in the columns of the bank's subarrays, the
// bank multiplies all operand pairs in place, reduces them with its adder tree
// and accumulators, applies ReLU, BatchNorm, Quantize and Pool, and transposes
// the n-bit results into bit planes. The shared bus (pim_dram_bus) then moves
// the bit planes of every bank to the bank of the next layer, one bank after
// another from the last one down, so the banks form a layer pipeline that
// works on successive inputs at the same time. Residual connections use a
// bank as a reserved bank: the shortcut input and the layer output are both
// copied into it and added in place (BK_ADD), then sent on.
//
// The host and its memory controller are outside: they load operands through
// host_wr_*, issue bank commands (bank_cmd_valid/bank_cmd, one port per bank),
// set the SFU constants (sfu_cfg) and start transfers (xfer_start/xfer_cfg).
// All ports are plain signals or packed arrays of the structs of pim_pkg.
module pim_dram
  import pim_pkg::*;
#(
  parameter int unsigned N_BANKS  = 8,
  parameter int unsigned N_SUB    = 8,
  parameter int unsigned ROWS     = 4096,
  parameter int unsigned COLS     = 4096,
  parameter int unsigned N_BITS   = 4,
  parameter int unsigned N_TAP    = 16,
  parameter int unsigned TR_DEPTH = 256,
  parameter int unsigned TR_WIDTH = 8,
  parameter int unsigned GB_DEPTH = 8
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // bank commands
  input  logic [N_BANKS-1:0]               bank_cmd_valid,
  input  bank_cmd_t [N_BANKS-1:0]          bank_cmd,
  output logic [N_BANKS-1:0]               bank_ready,
  output logic [N_BANKS-1:0]               bank_done,
  input  sfu_cfg_t [N_BANKS-1:0]           sfu_cfg,
  // host row writes
  input  logic                             host_wr_valid,
  output logic                             host_wr_ready,
  input  logic [3:0]                       host_wr_bank,
  input  logic [7:0]                       host_wr_sub,
  input  logic [ROW_AW-1:0]                host_wr_row,
  input  logic [7:0]                       host_wr_seg,
  input  logic [TR_DEPTH-1:0]              host_wr_data,
  // inter-bank transfers
  input  logic                             xfer_start,
  input  xfer_cfg_t [N_BANKS-1:0]          xfer_cfg,
  output logic                             xfer_busy,
  output logic                             xfer_done,
  output logic [15:0]                      xfer_rows,
  // status
  output logic [N_BANKS-1:0][15:0]         aap_count,
  output logic [N_BANKS-1:0][15:0]         results,
  output logic [N_BANKS-1:0][15:0]         forwards
);

  logic [N_BANKS-1:0][TR_DEPTH-1:0] gb_head;
  logic [N_BANKS-1:0]               gb_empty, gb_pop, wr_en;
  logic [7:0]                       wr_sub, wr_seg;
  logic [ROW_AW-1:0]                wr_row;
  logic [TR_DEPTH-1:0]              wr_data;

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    pim_bank #(.N_SUB(N_SUB), .ROWS(ROWS), .COLS(COLS), .N_BITS(N_BITS), .N_TAP(N_TAP),
               .TR_DEPTH(TR_DEPTH), .TR_WIDTH(TR_WIDTH), .GB_DEPTH(GB_DEPTH)) u_bank (
      .clk, .rst_n,
      .cmd_valid(bank_cmd_valid[b]), .cmd(bank_cmd[b]), .cmd_ready(bank_ready[b]), .done(bank_done[b]),
      .sfu_cfg(sfu_cfg[b]),
      .wr_en(wr_en[b]), .wr_sub, .wr_row, .wr_seg, .wr_data,
      .gb_head(gb_head[b]), .gb_empty(gb_empty[b]), .gb_pop(gb_pop[b]),
      .aap_count(aap_count[b]), .results(results[b]), .forwards(forwards[b]));
  end

  pim_dram_bus #(.N_BANKS(N_BANKS), .W(TR_DEPTH)) u_bus (
    .clk, .rst_n,
    .host_wr_valid, .host_wr_ready, .host_wr_bank, .host_wr_sub, .host_wr_row, .host_wr_seg, .host_wr_data,
    .xfer_start, .xfer_cfg, .xfer_busy, .xfer_done, .xfer_rows,
    .gb_head, .gb_empty, .gb_pop,
    .wr_en, .wr_sub, .wr_row, .wr_seg, .wr_data);

endmodule
