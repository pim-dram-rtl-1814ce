// tb_pim_pool: pass-through mode (every value out, one clock later) and max
// pooling over windows of 1..9 elements (one output per window, the maximum).
module tb_pim_pool;
  localparam int W = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable, clear, in_valid, out_valid; logic [7:0] window; logic [W-1:0] in_data, out_data;
  pim_pool #(.W(W)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    enable = 0; clear = 0; in_valid = 0; window = 1; in_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      in_data = W'($urandom); in_valid = 1; @(negedge clk); in_valid = 0;
      checks++; if (!out_valid || out_data != in_data) begin failures++; $display("FAIL pass"); end
    end
    enable = 1;
    for (int wdw = 1; wdw <= 9; wdw++) begin
      window = 8'(wdw);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int g = 0; g < 6; g++) begin
        int mx, outs;
        logic [W-1:0] got;
        mx = 0; outs = 0; got = '0;
        for (int e = 0; e < wdw; e++) begin
          in_data = W'($urandom);
          if (int'(in_data) > mx) mx = int'(in_data);
          in_valid = 1; @(negedge clk); in_valid = 0;
          if (out_valid) begin outs++; got = out_data; end
        end
        @(negedge clk);
        if (out_valid) begin outs++; got = out_data; end
        checks++;
        if (outs != 1 || int'(got) != mx) begin
          failures++; $display("FAIL pool w=%0d outs=%0d got %0d exp %0d", wdw, outs, got, mx);
        end
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
