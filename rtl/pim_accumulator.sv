// pim_accumulator: shift-and-add accumulator behind one adder-tree output.
//
// What it does: the adder tree delivers, one per clock, the column sums of
// product bit 0, 1, ..., 2*N_BITS-1 of a MAC. The accumulator shifts each sum
// left by the bit position, held in an internal counter, and adds it to the
// stored value, so after 2*N_BITS sums it holds the MAC result
// sum_b (tree sum of bit b) << b. This is the paper's description; the widths
// and the clear/done handshake are this design's.
//
// Interface: clear resets the value and the counter (it wins over in_valid);
// in_valid/in_sum add one sum; done is high once 2*N_BITS sums have been taken
// and further sums are ignored until clear. acc is the registered value.
module pim_accumulator #(
  parameter int unsigned IN_W   = 13,
  parameter int unsigned N_BITS = 4,
  localparam int unsigned ACC_W = IN_W + 2 * N_BITS,
  localparam int unsigned CNT_W = $clog2(2 * N_BITS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  in_sum,
  output logic [ACC_W-1:0] acc,
  output logic             done
);

  logic [CNT_W-1:0] cnt;   // bit position of the next sum

  assign done = (cnt == CNT_W'(2 * N_BITS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      cnt <= '0;
    end else if (clear) begin
      acc <= '0;
      cnt <= '0;
    end else if (in_valid && !done) begin
      acc <= acc + (ACC_W'(in_sum) << cnt);
      cnt <= cnt + 1'b1;
    end
  end

endmodule
