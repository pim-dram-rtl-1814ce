// tb_pim_batchnorm: random inputs and constants; output one clock later must be
// sat(((x - mean) * scale >>> shift) + beta) computed with 64-bit integers.
module tb_pim_batchnorm;
  localparam int W = 24, SC = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic signed [W-1:0] in_data, mean, beta, out_data;
  logic signed [SC-1:0] scale; logic [4:0] shift;
  pim_batchnorm #(.W(W), .SC(SC)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    in_valid = 0; in_data = 0; mean = 0; beta = 0; scale = 0; shift = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      longint e;
      in_data = W'($urandom_range(0, 20000)) - 24'sd5000;
      mean = W'($urandom_range(0, 2000));
      scale = SC'($urandom);
      shift = 5'($urandom_range(0, 12));
      beta = W'($urandom_range(0, 400)) - 24'sd200;
      if (it == 0) begin in_data = 24'sh7fffff; mean = -24'sd100; scale = 16'sh7fff; shift = 0; end
      e = ((longint'(in_data) - longint'(mean)) * longint'(scale)) >>> shift;
      e = e + longint'(beta);
      if (e > 64'sd8388607) e = 64'sd8388607;
      if (e < -64'sd8388608) e = -64'sd8388608;
      in_valid = 1; @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid || longint'(out_data) != e) begin
        failures++; $display("FAIL bn x=%0d got %0d exp %0d", in_data, out_data, e);
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
