// tb_pim_quantize: output one clock later must be clamp(x >>> qshift, 0, 15).
module tb_pim_quantize;
  localparam int W = 24, N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid; logic signed [W-1:0] in_data; logic [4:0] qshift; logic [N-1:0] out_data;
  pim_quantize #(.W(W), .N_BITS(N)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    in_valid = 0; in_data = 0; qshift = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      int e;
      in_data = W'($urandom_range(0, 600)) - 24'sd100;
      qshift = 5'($urandom_range(0, 5));
      e = int'(in_data) >>> qshift;
      if (e < 0) e = 0;
      if (e > 15) e = 15;
      in_valid = 1; @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid || int'(out_data) != e) begin
        failures++; $display("FAIL q x=%0d s=%0d got %0d exp %0d", in_data, qshift, out_data, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
