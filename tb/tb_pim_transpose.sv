// tb_pim_transpose: writes random words horizontally and reads every bit
// plane vertically (checked against the words), then writes bit planes
// vertically and reads words horizontally.
module tb_pim_transpose;
  localparam int D = 32, WD = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en, wv_en, rh_en;
  logic [4:0] wr_addr, rh_addr; logic [WD-1:0] wr_data, rh_data;
  logic [2:0] rd_bit, wv_bit; logic [D-1:0] rd_data, wv_data;
  pim_transpose #(.DEPTH(D), .WIDTH(WD)) dut (.*);
  int checks = 0, failures = 0;
  logic [WD-1:0] ref_w [D];
  logic [D-1:0] planes [WD];
  initial begin
    wr_en = 0; rd_en = 0; wv_en = 0; rh_en = 0; wr_addr = 0; rh_addr = 0; wr_data = 0;
    rd_bit = 0; wv_bit = 0; wv_data = 0;
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < D; i++) begin
        ref_w[i] = WD'($urandom);
        @(negedge clk); wr_en = 1; wr_addr = 5'(i); wr_data = ref_w[i];
      end
      @(negedge clk); wr_en = 0;
      for (int b = 0; b < WD; b++) begin
        logic [D-1:0] e;
        for (int i = 0; i < D; i++) e[i] = ref_w[i][b];
        rd_en = 1; rd_bit = 3'(b); @(negedge clk); rd_en = 0;
        checks++; if (rd_data != e) begin failures++; $display("FAIL vertical read bit %0d", b); end
      end
      for (int b = 0; b < WD; b++) begin
        planes[b] = $urandom;
        wv_en = 1; wv_bit = 3'(b); wv_data = planes[b]; @(negedge clk);
      end
      wv_en = 0;
      for (int i = 0; i < D; i++) begin
        logic [WD-1:0] e;
        for (int b = 0; b < WD; b++) e[b] = planes[b][i];
        rh_en = 1; rh_addr = 5'(i); @(negedge clk); rh_en = 0;
        checks++; if (rh_data != e) begin failures++; $display("FAIL horizontal read %0d", i); end
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
