// pim_pool: max-pooling unit, sits between the quantize and transpose units.
//
// When enable is high it keeps a running maximum and a counter of the
// elements seen; after `window` elements it emits the maximum and restarts,
// as the paper describes. The elements of a pooling window must arrive one
// after another (the mapping orders them so). When enable is low it passes
// every element through, as for layers without pooling. One register stage.
// window = 0 is treated as 1.
module pim_pool #(
  parameter int unsigned W = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  input  logic [7:0]   window,
  input  logic         clear,     // restart a window (new layer pass)
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data
);
  logic [7:0]   cnt;
  logic [W-1:0] maxv;
  logic [W-1:0] newmax;
  logic         last;

  always_comb begin
    newmax = (cnt == 8'd0 || in_data > maxv) ? in_data : maxv;
    last   = (cnt + 8'd1 >= window);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; maxv <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        cnt <= '0;
      end else if (in_valid) begin
        if (!enable) begin
          out_valid <= 1'b1;
          out_data  <= in_data;
        end else if (last) begin
          out_valid <= 1'b1;
          out_data  <= newmax;
          cnt       <= '0;
        end else begin
          maxv <= newmax;
          cnt  <= cnt + 8'd1;
        end
      end
    end
  end
endmodule
