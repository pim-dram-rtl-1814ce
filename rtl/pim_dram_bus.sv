// pim_dram_bus: the DRAM-internal bus shared by the banks.
//
// It carries two kinds of row writes into the banks' subarrays: host writes
// (loading weights and input activations), and the inter-bank transfers of the
// dataflow, where each bank's transposed results are copied (RowClone over the
// bus) into the bank that holds the next layer or into a reserved bank. The
// paper has all banks compute in parallel and then transfer one after another,
// the last source bank first ("bank 2 will send its data to bank 3 followed by
// bank 1 sending its data to bank 2"). On xfer_start this bus visits the banks
// from N_BANKS-1 down to 0; a bank whose cfg.en is set has every row of its
// global buffer popped, one row per clock, and written to bank cfg.dst_bank,
// subarray cfg.dst_sub, rows cfg.dst_row, cfg.dst_row+1, ... (one row per bit
// plane), column segment cfg.dst_seg. xfer_done pulses at the end; xfer_rows
// counts the rows moved by the last transfer.
//
// Bank numbers are 4 bits wide (up to 16 banks); only clog2(N_BANKS) bits are
// used. rst_n also disables the assertion, which lint reports as mixed
// sync/async use.
//
// Host writes (host_wr_*) are accepted (host_wr_ready) only while no transfer
// runs. The row width W is that of the transpose unit; one row per clock and
// the visiting order among disabled banks are this design's choices.
module pim_dram_bus
  import pim_pkg::*;
#(
  parameter int unsigned N_BANKS = 8,
  parameter int unsigned W       = 256
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // host writes
  input  logic                           host_wr_valid,
  output logic                           host_wr_ready,
  input  logic [3:0]                     host_wr_bank,
  input  logic [7:0]                     host_wr_sub,
  input  logic [ROW_AW-1:0]              host_wr_row,
  input  logic [7:0]                     host_wr_seg,
  input  logic [W-1:0]                   host_wr_data,
  // inter-bank transfer
  input  logic                           xfer_start,
  input  xfer_cfg_t [N_BANKS-1:0]        xfer_cfg,
  output logic                           xfer_busy,
  output logic                           xfer_done,
  output logic [15:0]                    xfer_rows,
  // banks' global buffers
  input  logic [N_BANKS-1:0][W-1:0]      gb_head,
  input  logic [N_BANKS-1:0]             gb_empty,
  output logic [N_BANKS-1:0]             gb_pop,
  // row writes into the banks
  output logic [N_BANKS-1:0]             wr_en,
  output logic [7:0]                     wr_sub,
  output logic [ROW_AW-1:0]              wr_row,
  output logic [7:0]                     wr_seg,
  output logic [W-1:0]                   wr_data
);
  localparam int unsigned BW = (N_BANKS > 1) ? $clog2(N_BANKS) : 1;

  typedef enum logic [1:0] {X_IDLE, X_BANK, X_DONE} xstate_e;
  xstate_e          st;
  logic [BW-1:0]    src;
  logic [15:0]      plane;
  xfer_cfg_t        cur;
  logic             moving;

  assign cur       = xfer_cfg[src];
  assign moving    = (st == X_BANK) && cur.en && !gb_empty[src];
  assign xfer_busy = (st != X_IDLE);
  assign host_wr_ready = (st == X_IDLE) && !xfer_start;

  always_comb begin
    gb_pop  = '0;
    wr_en   = '0;
    wr_sub  = host_wr_sub;
    wr_row  = host_wr_row;
    wr_seg  = host_wr_seg;
    wr_data = host_wr_data;
    if (moving) begin
      gb_pop[src] = 1'b1;
      wr_en[cur.dst_bank[BW-1:0]] = 1'b1;
      wr_sub  = cur.dst_sub;
      wr_row  = cur.dst_row + plane;
      wr_seg  = cur.dst_seg;
      wr_data = gb_head[src];
    end else if (host_wr_valid && host_wr_ready) begin
      wr_en[host_wr_bank[BW-1:0]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= X_IDLE; src <= '0; plane <= '0; xfer_done <= 1'b0; xfer_rows <= '0;
    end else begin
      xfer_done <= 1'b0;
      unique case (st)
        X_IDLE: if (xfer_start) begin
          st <= X_BANK; src <= BW'(N_BANKS - 1); plane <= '0; xfer_rows <= '0;
        end
        X_BANK: begin
          if (moving) begin
            plane <= plane + 16'd1; xfer_rows <= xfer_rows + 16'd1;
          end else begin
            plane <= '0;
            if (src == '0) st <= X_DONE;
            else src <= src - 1'b1;
          end
        end
        X_DONE: begin xfer_done <= 1'b1; st <= X_IDLE; end
        default: st <= X_IDLE;
      endcase
    end
  end

  // A bank never sends to itself.
  a_no_self: assert property (@(posedge clk) disable iff (!rst_n)
                              moving |-> cur.dst_bank[BW-1:0] != src)
    else $error("bank sends to itself");
endmodule
