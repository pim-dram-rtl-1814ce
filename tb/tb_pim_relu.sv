// tb_pim_relu: random signed values, including the extremes; the output one
// clock later must be max(0, x) and valid must follow with one clock delay.
module tb_pim_relu;
  localparam int W = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid; logic signed [W-1:0] in_data, out_data;
  pim_relu #(.W(W)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    in_valid = 0; in_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      logic signed [W-1:0] x;
      x = (it == 0) ? -(24'sd1 <<< 23) : (it == 1) ? 24'sd0 : (it == 2) ? 24'sh7fffff : W'($urandom);
      in_data = x; in_valid = 1; @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid || out_data != ((x < 0) ? 0 : x)) begin
        failures++; $display("FAIL relu %0d -> %0d", x, out_data);
      end
      @(negedge clk);
      checks++; if (out_valid) begin failures++; $display("FAIL valid held"); end
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
