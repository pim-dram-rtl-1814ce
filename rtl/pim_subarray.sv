// pim_subarray: functional model of one DRAM subarray with in-subarray compute.
//
// What it does: holds ROWS data rows of COLS bits plus the nine compute rows
// (A, A-1, B, B-1, Cin, Cin-1, Cout, Cout-1, row0). Each accepted command is one
// ACTIVATE-ACTIVATE-PRECHARGE (AAP) and acts on every column at once:
//   AAP_COPY  RowClone: the source row is sensed and restored into the
//             destination rows (one data row and/or any compute rows).
//   AAP_AND_A The AND-WL of the pair (A, A-1) is raised; the bitline settles
//             to A AND A-1, which is restored into A and A-1 (and destinations).
//   AAP_AND_B The same for the pair (B, B-1).
//   AAP_MAJ3  Triple-row activation of A, B, Cin: Majority(A,B,Cin) is restored
//             into A, B and Cin (so Cin now holds the carry) and destinations.
//   AAP_MAJ5  Activation of A-1, B-1, Cin-1 and the negated ports of the two
//             dual-contact rows Cout, Cout-1: Majority(A-1,B-1,Cin-1,~Cout,~Cout)
//             is the sum bit, restored into those rows and destinations.
// These are the primitives of the paper (its Fig. 4, 9 and 11). Charge sharing,
// sense margins and timing are not modelled: one AAP takes one clock.
//
// Dual-contact cells: Cout and Cout-1 store the value written to them; the
// MAJ5 activation reads them inverted, which is how the paper obtains Cout'.
// When MAJ5 restores its result through the negated port they store its
// complement.
//
// Interface: cmd_valid/cmd issue an AAP (always accepted). rd_en/rd_row sense a
// data row into the row buffer rd_data on the next clock edge (the local sense
// amplifiers feeding the column decoder). wr_en/wr_row/wr_seg/wr_data write
// SEG_W bits at column SEG_W*wr_seg of a data row: this is the port used by the
// host and by inter-bank RowClone. An AAP that writes a data row wins over an
// external write in the same cycle.
//
// Row addresses are ROW_AW (16) bits wide everywhere; a subarray uses the low
// clog2(ROWS) bits, so the upper bits of rd_row and wr_row are unused (the
// a_range assertion checks destination rows). rst_n also disables the
// assertions, which lint reports as mixed sync/async use.
//
// Sizes follow the paper (4096 x 4096). Data rows have no reset, like DRAM;
// compute rows reset to zero, which gives row0 its zeros.
module pim_subarray
  import pim_pkg::*;
#(
  parameter int unsigned ROWS  = 4096,
  parameter int unsigned COLS  = 4096,
  parameter int unsigned SEG_W = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  input  aap_cmd_t            cmd,
  input  logic                rd_en,
  input  logic [ROW_AW-1:0]   rd_row,
  output logic [COLS-1:0]     rd_data,
  input  logic                wr_en,
  input  logic [ROW_AW-1:0]   wr_row,
  input  logic [7:0]          wr_seg,
  input  logic [SEG_W-1:0]    wr_data
);

  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1;

  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] cr  [NCR];

  logic [COLS-1:0] src_val, res;
  logic [COLS-1:0] ra, ra1, rb, rb1, rc, rc1, nco, nco1;

  assign ra   = cr[CR_A];
  assign ra1  = cr[CR_A1];
  assign rb   = cr[CR_B];
  assign rb1  = cr[CR_B1];
  assign rc   = cr[CR_CIN];
  assign rc1  = cr[CR_CIN1];
  assign nco  = ~cr[CR_COUT];
  assign nco1 = ~cr[CR_COUT1];

  always_comb begin
    src_val = cmd.src_is_cr ? cr[cmd.src_cr] : mem[cmd.src_row[RAW-1:0]];
    unique case (cmd.op)
      AAP_COPY:  res = src_val;
      AAP_AND_A: res = ra & ra1;
      AAP_AND_B: res = rb & rb1;
      AAP_MAJ3:  res = (ra & rb) | (ra & rc) | (rb & rc);
      AAP_MAJ5:  res = (ra1 & rb1 & rc1) | (ra1 & rb1 & nco) | (ra1 & rb1 & nco1) |
                       (ra1 & rc1 & nco) | (ra1 & rc1 & nco1) | (ra1 & nco & nco1) |
                       (rb1 & rc1 & nco) | (rb1 & rc1 & nco1) | (rb1 & nco & nco1) |
                       (rc1 & nco & nco1);
      default:   res = '0;
    endcase
  end

  // Compute rows: rows opened by the activation itself, then the destinations.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NCR); i++) cr[i] <= '0;
    end else if (cmd_valid && cmd.op != AAP_NOP) begin
      unique case (cmd.op)
        AAP_AND_A: begin cr[CR_A] <= res; cr[CR_A1] <= res; end
        AAP_AND_B: begin cr[CR_B] <= res; cr[CR_B1] <= res; end
        AAP_MAJ3:  begin cr[CR_A] <= res; cr[CR_B] <= res; cr[CR_CIN] <= res; end
        AAP_MAJ5:  begin
          cr[CR_A1] <= res; cr[CR_B1] <= res; cr[CR_CIN1] <= res;
          cr[CR_COUT] <= ~res; cr[CR_COUT1] <= ~res;
        end
        default: ;
      endcase
      for (int i = 0; i < int'(NCR) - 1; i++)
        if (cmd.dst_cr[i]) cr[i] <= res;
    end
  end

  // Data rows.
  always_ff @(posedge clk) begin
    if (cmd_valid && cmd.op != AAP_NOP && cmd.dst_en)
      mem[cmd.dst_row[RAW-1:0]] <= res;
    else if (wr_en)
      mem[wr_row[RAW-1:0]][wr_seg*SEG_W +: SEG_W] <= wr_data;
  end

  // Local sense amplifiers / row buffer.
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_row[RAW-1:0]];
  end

  // row0 is never a destination, and addressed rows exist.
  a_row0: assert property (@(posedge clk) disable iff (!rst_n) cmd_valid |-> (cmd.dst_cr & M_ROW0) == '0)
    else $error("row0 must not be written");
  a_range: assert property (@(posedge clk) disable iff (!rst_n)
                            cmd_valid && cmd.dst_en |-> 32'(cmd.dst_row) < ROWS)
    else $error("destination row out of range");

endmodule
