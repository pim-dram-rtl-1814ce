// tb_pim_mul_seq: drives the multiplication/addition sequencer into a small
// subarray and checks, in every column, the product (or sum) against integer
// arithmetic, and the number of AAPs against the closed-form count.
// Columns hold random 4-bit operand pairs; columns 0..3 hold the corner cases
// 0*0, 15*15, 15*1 and 1*15.
module tb_pim_mul_seq;
  import pim_pkg::*;
  localparam int N    = 4;
  localparam int COLS = 64;
  localparam int ROWS = 64;
  localparam int IW   = 3;   // max(N-1, clog2(2N))
  localparam int MUL_AAPS = IW + N*N*(5*IW + 2) + 2*(2*N-1) + 1;
  localparam int ADD_AAPS = 5*N + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start; seq_mode_e mode;
  logic cmd_valid, busy, done; aap_cmd_t cmd; logic [15:0] aap_count;
  logic rd_en; logic [15:0] rd_row; logic [COLS-1:0] rd_data;

  pim_mul_seq #(.N_BITS(N)) dut (.clk, .rst_n, .start, .mode, .a_base(16'd0), .b_base(16'd8),
    .p_base(16'd16), .i_base(16'd32), .cmd_valid, .cmd, .busy, .done, .aap_count);
  pim_subarray #(.ROWS(ROWS), .COLS(COLS), .SEG_W(COLS)) sa (.clk, .rst_n, .cmd_valid, .cmd,
    .rd_en, .rd_row, .rd_data, .wr_en(1'b0), .wr_row(16'd0), .wr_seg(8'd0), .wr_data('0));

  int checks = 0, failures = 0;
  logic [N-1:0] av [COLS];
  logic [N-1:0] bv [COLS];

  task automatic load(int seed_case);
    for (int c = 0; c < COLS; c++) begin
      av[c] = N'($urandom); bv[c] = N'($urandom);
    end
    av[0] = 0;  bv[0] = 0;  av[1] = 15; bv[1] = 15;
    av[2] = 15; bv[2] = 1;  av[3] = 1;  bv[3] = 15;
    // garbage in product and intermediate rows
    for (int r = 16; r < 40; r++) sa.mem[r] = {$urandom, $urandom};
    for (int b = 0; b < N; b++)
      for (int c = 0; c < COLS; c++) begin
        sa.mem[b][c]   = av[c][b];
        sa.mem[8+b][c] = bv[c][b];
      end
    if (seed_case < 0) $display("unused");
  endtask

  task automatic run(seq_mode_e m, int exp_aaps);
    int cyc = 0;
    @(negedge clk); mode = m; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (aap_count != 16'(exp_aaps) || cyc != exp_aaps) begin
      failures++; $display("FAIL aap count %0d cycles %0d expected %0d", aap_count, cyc, exp_aaps);
    end
  endtask

  initial begin
    start = 0; mode = SEQ_MUL; rd_en = 0; rd_row = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      load(t);
      run(SEQ_MUL, MUL_AAPS);
      for (int c = 0; c < COLS; c++) begin
        logic [2*N-1:0] p;
        for (int b = 0; b < 2*N; b++) p[b] = sa.mem[16+b][c];
        checks++;
        if (p != 8'(av[c] * bv[c])) begin
          failures++; $display("FAIL mul col %0d: %0d*%0d got %0d", c, av[c], bv[c], p);
        end
      end
      load(t);
      run(SEQ_ADD, ADD_AAPS);
      for (int c = 0; c < COLS; c++) begin
        logic [N:0] s;
        for (int b = 0; b <= N; b++) s[b] = sa.mem[16+b][c];
        checks++;
        if (s != 5'(av[c] + bv[c])) begin
          failures++; $display("FAIL add col %0d: %0d+%0d got %0d", c, av[c], bv[c], s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
