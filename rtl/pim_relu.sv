// pim_relu: ReLU unit of a bank's special function units.
//
// Replaces a negative (two's complement) MAC result by zero and passes others
// unchanged, as the paper describes. One register stage: out_valid/out_data
// follow in_valid/in_data by one clock. The register stage is this design's
// choice. The sign bit of out_data is 0 by construction, so synthesis reports
// it as a constant output bit.
module pim_relu #(
  parameter int unsigned W = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_data,
  output logic                out_valid,
  output logic signed [W-1:0] out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= in_data[W-1] ? '0 : in_data;
    end
  end
endmodule
