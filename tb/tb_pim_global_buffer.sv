// tb_pim_global_buffer: random pushes and pops against a queue model; checks
// order, empty/full flags and that pushes into a full buffer are dropped.
module tb_pim_global_buffer;
  localparam int W = 64, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, empty, full; logic [W-1:0] push_data, head; logic [2:0] count;
  pim_global_buffer #(.W(W), .DEPTH(D)) dut (.*);
  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] q [$];
  initial begin
    push = 0; pop = 0; push_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      push = ($urandom_range(0, 99) < 55); pop = ($urandom_range(0, 99) < 45);
      push_data = {$urandom, $urandom};
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D) || int'(count) != q.size()) begin
        failures++; $display("FAIL flags size=%0d", q.size());
      end
      if (q.size() > 0) begin
        checks++; if (head != q[0]) begin failures++; $display("FAIL head"); end
      end
      if (full) fulls++;
      begin
        bit was_full;
        was_full = (q.size() == D);
        @(negedge clk);
        if (pop && q.size() > 0) void'(q.pop_front());
        if (push && !was_full) q.push_back(push_data);
      end
    end
    checks++; if (fulls == 0) begin failures++; $display("FAIL never full"); end
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
