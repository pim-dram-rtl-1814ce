// pim_batchnorm: inference batch normalisation unit.
//
// The paper describes it as subtracting, dividing and scaling by constants
// fixed for inference. This design computes
//   y = (((x - mean) * scale) >>> shift) + beta
// where the division is the arithmetic right shift and scale is a signed
// fixed-point factor; the result saturates to W bits. One register stage:
// out_valid/out_data follow in_valid/in_data by one clock. The constants are
// inputs, held stable by the bank's configuration.
module pim_batchnorm #(
  parameter int unsigned W  = 24,
  parameter int unsigned SC = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  in_data,
  input  logic signed [W-1:0]  mean,
  input  logic signed [SC-1:0] scale,
  input  logic [4:0]           shift,
  input  logic signed [W-1:0]  beta,
  output logic                 out_valid,
  output logic signed [W-1:0]  out_data
);
  localparam int unsigned PW = W + 1 + SC + 1;
  localparam logic signed [PW-1:0] MAXV = PW'((64'sd1 <<< (W - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(64'sd1 <<< (W - 1));

  logic signed [PW-1:0] diff, prod, y;

  always_comb begin
    diff = PW'(in_data) - PW'(mean);
    prod = (diff * PW'(scale)) >>> shift;
    y    = prod + PW'(beta);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        if (y > MAXV)      out_data <= MAXV[W-1:0];
        else if (y < MINV) out_data <= MINV[W-1:0];
        else               out_data <= y[W-1:0];
      end
    end
  end
endmodule
