// pim_adder_tree: reconfigurable adder tree between the column decoder and the
// accumulators of a bank.
//
// What it does: the N_IN leaves are the bits of one sensed product-bit row
// (one column each). Level 1 has N_IN/2 two-input units, each later level half
// as many, down to one unit at level LEVELS = log2(N_IN) (the paper's Fig. 14
// shows the same shape for 16 inputs: 8, 4, 2, 1 units). Every unit either
// adds its two inputs or forwards its left input (node_add = 0), and every leaf
// can be masked off (leaf_en), which are the two reconfiguration points the
// paper names. Because the paper wires all levels to the accumulators, the
// outputs are the N_TAP consecutive units tap_base .. tap_base+N_TAP-1 of
// level tap_level; a MAC of up to 2^L columns aligned to a 2^L block is summed
// by one unit of level L. Units past the end of the level read as zero.
//
// Timing: purely combinational; the bank registers the row before and the
// accumulators after it.
//
// Choices of this design: which operand a forwarding unit passes (the left
// one), the tap interface and N_TAP; every level carries the full sum width
// SW = LEVELS+1 instead of growing by one bit per level as in the paper (the
// high bits of the upper levels are constant zero and are trimmed by
// synthesis). node_add is indexed level by level: level l starts at
// N_IN - (N_IN >> (l-1)).
module pim_adder_tree #(
  parameter int unsigned N_IN   = 4096,
  parameter int unsigned N_TAP  = 16,
  localparam int unsigned LEVELS = $clog2(N_IN),
  localparam int unsigned SW     = LEVELS + 1,
  localparam int unsigned LVW    = $clog2(LEVELS + 1)
) (
  input  logic [N_IN-1:0]          leaf,
  input  logic [N_IN-1:0]          leaf_en,
  input  logic [N_IN-2:0]          node_add,
  input  logic [LVW-1:0]           tap_level,
  input  logic [LEVELS-1:0]        tap_base,
  output logic [N_TAP-1:0][SW-1:0] tap_sum
);

  // Outputs of tap_base .. tap_base+N_TAP-1 of every level.
  logic [N_TAP-1:0][SW-1:0] lvtap [LEVELS+1];

  for (genvar l = 0; l <= LEVELS; l++) begin : g_level
    localparam int unsigned NN  = N_IN >> l;
    localparam int unsigned OFS = (l == 0) ? 0 : N_IN - (N_IN >> (l - 1));
    logic [SW-1:0] s [NN];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < NN; i++) begin : g_in
        assign s[i] = SW'(leaf[i] & leaf_en[i]);
      end
    end else begin : g_node
      for (genvar j = 0; j < NN; j++) begin : g_unit
        assign s[j] = node_add[OFS + j] ? g_level[l-1].s[2*j] + g_level[l-1].s[2*j+1]
                                        : g_level[l-1].s[2*j];
      end
    end
    always_comb begin
      for (int t = 0; t < int'(N_TAP); t++) begin
        int unsigned idx;
        idx = int'(tap_base) + t;
        lvtap[l][t] = (idx < NN) ? s[idx] : '0;
      end
    end
  end

  assign tap_sum = (tap_level <= LVW'(LEVELS)) ? lvtap[tap_level] : '0;

endmodule
