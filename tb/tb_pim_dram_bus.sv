// tb_pim_dram_bus: the shared bus with 4 banks and 16-bit rows. The banks'
// global buffers are modelled by queues in the testbench. It checks that host
// writes pass through while idle and are refused during a transfer, and that a
// transfer empties the buffers of enabled banks only, highest bank first, one
// row per clock, each row going to the configured bank, subarray, row
// (incremented per bit plane) and segment.
module tb_pim_dram_bus;
  import pim_pkg::*;
  localparam int NB = 4, W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic host_wr_valid, host_wr_ready; logic [3:0] host_wr_bank; logic [7:0] host_wr_sub, host_wr_seg;
  logic [ROW_AW-1:0] host_wr_row; logic [W-1:0] host_wr_data;
  logic xfer_start, xfer_busy, xfer_done; xfer_cfg_t [NB-1:0] xfer_cfg; logic [15:0] xfer_rows;
  logic [NB-1:0][W-1:0] gb_head; logic [NB-1:0] gb_empty, gb_pop;
  logic [NB-1:0] wr_en; logic [7:0] wr_sub, wr_seg; logic [ROW_AW-1:0] wr_row; logic [W-1:0] wr_data;
  pim_dram_bus #(.N_BANKS(NB), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] q [NB][$];
  // expected writes, in order
  typedef struct { int bank; int sub; int row; int seg; logic [W-1:0] data; } wr_t;
  wr_t exp_wr [$];

  always_comb for (int b = 0; b < NB; b++) begin
    gb_empty[b] = (q[b].size() == 0);
    gb_head[b]  = gb_empty[b] ? '0 : q[b][0];
  end

  // check every bus write against the expected list
  always @(posedge clk) if (rst_n && wr_en != 0 && exp_wr.size() > 0 && xfer_busy) begin
    wr_t e; e = exp_wr.pop_front();
    checks++;
    if (wr_en != NB'(1 << e.bank) || int'(wr_sub) != e.sub || int'(wr_row) != e.row ||
        int'(wr_seg) != e.seg || wr_data != e.data) begin
      failures++;
      $display("FAIL xfer write en=%b sub=%0d row=%0d seg=%0d data=%h exp bank %0d sub %0d row %0d seg %0d data %h",
               wr_en, wr_sub, wr_row, wr_seg, wr_data, e.bank, e.sub, e.row, e.seg, e.data);
    end
  end
  always @(posedge clk) for (int b = 0; b < NB; b++) if (gb_pop[b]) begin
    checks++;
    if (q[b].size() == 0) begin failures++; $display("FAIL pop of empty buffer %0d", b); end
    else void'(q[b].pop_front());
  end

  initial begin
    int rows;
    host_wr_valid = 0; host_wr_bank = 0; host_wr_sub = 0; host_wr_seg = 0; host_wr_row = 0; host_wr_data = 0;
    xfer_start = 0; xfer_cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      // host write while idle
      @(negedge clk);
      host_wr_valid = 1; host_wr_bank = 4'($urandom_range(0, NB - 1)); host_wr_sub = 8'($urandom);
      host_wr_row = 16'($urandom); host_wr_seg = 8'($urandom); host_wr_data = W'($urandom);
      #1;
      checks++;
      if (!host_wr_ready || wr_en != NB'(1 << host_wr_bank) || wr_row != host_wr_row ||
          wr_data != host_wr_data || wr_sub != host_wr_sub || wr_seg != host_wr_seg) begin
        failures++; $display("FAIL host write");
      end
      @(negedge clk); host_wr_valid = 0;
      // fill buffers and configure a transfer
      rows = 0;
      for (int b = 0; b < NB; b++) begin
        int n;
        n = $urandom_range(0, 4);
        for (int i = 0; i < n; i++) q[b].push_back(W'($urandom));
        xfer_cfg[b].en = 1'($urandom);
        xfer_cfg[b].dst_bank = 4'((b + 1 + $urandom_range(0, NB - 2)) % NB);
        xfer_cfg[b].dst_sub = 8'($urandom); xfer_cfg[b].dst_row = 16'($urandom_range(0, 1000));
        xfer_cfg[b].dst_seg = 8'($urandom);
      end
      for (int b = NB - 1; b >= 0; b--)
        if (xfer_cfg[b].en)
          for (int i = 0; i < q[b].size(); i++) begin
            wr_t e;
            e.bank = int'(xfer_cfg[b].dst_bank); e.sub = int'(xfer_cfg[b].dst_sub);
            e.row = int'(xfer_cfg[b].dst_row) + i; e.seg = int'(xfer_cfg[b].dst_seg); e.data = q[b][i];
            exp_wr.push_back(e); rows++;
          end
      @(negedge clk); xfer_start = 1;
      @(negedge clk); xfer_start = 0;
      // host write refused during the transfer
      host_wr_valid = 1; #1;
      checks++;
      if (xfer_busy && host_wr_ready) begin failures++; $display("FAIL host accepted while busy"); end
      @(negedge clk); host_wr_valid = 0;
      while (xfer_busy) @(negedge clk);
      checks++;
      if (exp_wr.size() != 0 || int'(xfer_rows) != rows) begin
        failures++; $display("FAIL rows %0d exp %0d left %0d", xfer_rows, rows, exp_wr.size());
      end
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (xfer_cfg[b].en && q[b].size() != 0) begin failures++; $display("FAIL bank %0d not emptied", b); end
        q[b].delete();
      end
      exp_wr.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
