// pim_quantize: quantize unit, brings a normalised value to the N_BITS-bit
// unsigned activation precision of the next layer.
//
// The paper names this unit (and lists its area and power) without giving its
// insides. This design does the simplest thing: q = clamp(x >>> qshift, 0,
// 2^N_BITS - 1). One register stage: out follows in by one clock.
module pim_quantize #(
  parameter int unsigned W      = 24,
  parameter int unsigned N_BITS = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_data,
  input  logic [4:0]          qshift,
  output logic                out_valid,
  output logic [N_BITS-1:0]   out_data
);
  logic signed [W-1:0] s;
  assign s = in_data >>> qshift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        if (s < 0)                             out_data <= '0;
        else if (s > W'((1 << N_BITS) - 1))    out_data <= '1;
        else                                   out_data <= s[N_BITS-1:0];
      end
    end
  end
endmodule
