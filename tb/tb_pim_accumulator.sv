// tb_pim_accumulator: feeds 2n random tree sums and checks the shift-add
// result sum_b s_b << b, that done rises after exactly 2n sums, that extra sums
// are ignored, and that clear restarts it.
module tb_pim_accumulator;
  localparam int IN_W = 13, N = 4, ACC_W = IN_W + 2*N;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, in_valid; logic [IN_W-1:0] in_sum; logic [ACC_W-1:0] acc; logic done;
  pim_accumulator #(.IN_W(IN_W), .N_BITS(N)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    clear = 0; in_valid = 0; in_sum = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 50; it++) begin
      longint e;
      int cyc;
      e = 0; cyc = 0;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int b = 0; b < 2*N; b++) begin
        in_sum = IN_W'($urandom_range(0, 4096));
        e += longint'(in_sum) << b;
        checks++; if (done) begin failures++; $display("FAIL done early"); end
        in_valid = 1; @(negedge clk); cyc++;
        in_valid = 0;
        if (it % 4 == 0) @(negedge clk);  // sometimes a gap between sums
      end
      checks++; if (!done || cyc != 2*N) begin failures++; $display("FAIL done/latency"); end
      checks++; if (acc != ACC_W'(e)) begin failures++; $display("FAIL acc %0d exp %0d", acc, e); end
      in_valid = 1; in_sum = 13'd100; @(negedge clk); in_valid = 0;
      checks++; if (acc != ACC_W'(e)) begin failures++; $display("FAIL extra sum taken"); end
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
