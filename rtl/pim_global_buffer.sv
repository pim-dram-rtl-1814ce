// pim_global_buffer: global buffer of a bank, between the transpose unit and
// the DRAM internal bus.
//
// The paper only names it. This design makes it the simplest buffer that does
// the job: a first-in first-out queue of DEPTH rows of W bits. push writes a
// row (ignored when full), pop removes the head (ignored when empty); head is
// the oldest row, valid while !empty.
module pim_global_buffer #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] push_data,
  input  logic         pop,
  output logic [W-1:0] head,
  output logic         empty,
  output logic         full,
  output logic [AW:0]  count
);
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign head  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push && !full) begin
        wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (pop && !empty) begin
        rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      end
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= push_data;
  end
endmodule
