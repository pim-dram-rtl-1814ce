// tb_pim_subarray: checks each AAP primitive of the subarray model against a
// bitwise reference: RowClone copy into data and compute rows, AND of the A
// and B pairs, triple-row majority (and that A, B, Cin take the carry), the
// quintuple majority with the negated dual-contact rows, segment writes, the
// row buffer read, and that row0 stays zero.
module tb_pim_subarray;
  import pim_pkg::*;
  localparam int COLS = 128, ROWS = 32, SEG = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid; aap_cmd_t cmd;
  logic rd_en; logic [15:0] rd_row; logic [COLS-1:0] rd_data;
  logic wr_en; logic [15:0] wr_row; logic [7:0] wr_seg; logic [SEG-1:0] wr_data;
  pim_subarray #(.ROWS(ROWS), .COLS(COLS), .SEG_W(SEG)) dut (.*);

  int checks = 0, failures = 0;
  logic [COLS-1:0] ref_mem [ROWS];
  logic [COLS-1:0] a, a1, b, b1, ci, ci1, co, exp_v;

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic chk(logic [COLS-1:0] got, logic [COLS-1:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic issue(aap_cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0; cmd = AAP_IDLE;
  endtask

  function automatic aap_cmd_t cp(int src, logic [NCR-1:0] dcr, logic den, int drow);
    aap_cmd_t c = AAP_IDLE;
    c.op = AAP_COPY; c.src_row = 16'(src); c.dst_cr = dcr; c.dst_en = den; c.dst_row = 16'(drow);
    return c;
  endfunction

  initial begin
    aap_cmd_t c;
    cmd_valid = 0; cmd = AAP_IDLE; rd_en = 0; rd_row = 0; wr_en = 0; wr_row = 0; wr_seg = 0; wr_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // load rows through the segment write port
    for (int r = 0; r < 8; r++) begin
      ref_mem[r] = rnd();
      for (int s = 0; s < COLS/SEG; s++) begin
        @(negedge clk); wr_en = 1; wr_row = 16'(r); wr_seg = 8'(s); wr_data = ref_mem[r][s*SEG +: SEG];
      end
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < 8; r++) begin
      @(negedge clk); rd_en = 1; rd_row = 16'(r);
      @(negedge clk); rd_en = 0;
      chk(rd_data, ref_mem[r], "segment write / row read");
    end
    // AND of pair A, A-1 into data row 10
    issue(cp(0, M_A, 0, 0)); issue(cp(1, M_A1, 0, 0));
    c = AAP_IDLE; c.op = AAP_AND_A; c.dst_en = 1; c.dst_row = 10; issue(c);
    chk(dut.mem[10], ref_mem[0] & ref_mem[1], "AND A pair result");
    chk(dut.cr[CR_A], ref_mem[0] & ref_mem[1], "AND restores A");
    chk(dut.cr[CR_A1], ref_mem[0] & ref_mem[1], "AND restores A-1");
    // AND of pair B, B-1 (both copies in one AAP per source)
    issue(cp(2, M_B, 0, 0)); issue(cp(3, M_B1, 0, 0));
    c = AAP_IDLE; c.op = AAP_AND_B; c.dst_cr = M_CIN1; issue(c);
    chk(dut.cr[CR_B], ref_mem[2] & ref_mem[3], "AND B pair");
    chk(dut.cr[CR_CIN1], ref_mem[2] & ref_mem[3], "AND B into Cin-1");
    // MAJ3
    issue(cp(4, M_A, 0, 0)); issue(cp(5, M_B, 0, 0)); issue(cp(6, M_CIN, 0, 0));
    a = ref_mem[4]; b = ref_mem[5]; ci = ref_mem[6];
    exp_v = (a & b) | (a & ci) | (b & ci);
    c = AAP_IDLE; c.op = AAP_MAJ3; c.dst_cr = M_COUT | M_COUT1; c.dst_en = 1; c.dst_row = 11; issue(c);
    chk(dut.mem[11], exp_v, "MAJ3 result");
    chk(dut.cr[CR_CIN], exp_v, "MAJ3 restores Cin");
    chk(dut.cr[CR_A], exp_v, "MAJ3 restores A");
    chk(dut.cr[CR_COUT], exp_v, "Cout stores carry");
    // MAJ5 with negated Cout
    issue(cp(0, M_A1, 0, 0)); issue(cp(1, M_B1, 0, 0)); issue(cp(7, M_CIN1, 0, 0));
    a1 = ref_mem[0]; b1 = ref_mem[1]; ci1 = ref_mem[7]; co = ~exp_v;
    for (int i = 0; i < COLS; i++) begin
      int n;
      n = int'(a1[i]) + int'(b1[i]) + int'(ci1[i]) + 2 * int'(co[i]);
      exp_v[i] = (n >= 3);
    end
    c = AAP_IDLE; c.op = AAP_MAJ5; c.dst_en = 1; c.dst_row = 12; issue(c);
    chk(dut.mem[12], exp_v, "MAJ5 result");
    chk(dut.cr[CR_COUT], ~exp_v, "MAJ5 restores Cout through negated port");
    // full adder check: sum row = a1 ^ b1 ^ ci1 when carry = maj(a1,b1,ci1)
    issue(cp(0, M_A | M_A1, 0, 0)); issue(cp(1, M_B | M_B1, 0, 0)); issue(cp(7, M_CIN | M_CIN1, 0, 0));
    c = AAP_IDLE; c.op = AAP_MAJ3; c.dst_cr = M_COUT | M_COUT1; issue(c);
    c = AAP_IDLE; c.op = AAP_MAJ5; c.dst_en = 1; c.dst_row = 13; issue(c);
    chk(dut.mem[13], ref_mem[0] ^ ref_mem[1] ^ ref_mem[7], "full-adder sum");
    chk(dut.cr[CR_CIN], (ref_mem[0] & ref_mem[1]) | (ref_mem[0] & ref_mem[7]) | (ref_mem[1] & ref_mem[7]), "full-adder carry");
    // copy from compute row row0 clears a data row
    c = cp(0, '0, 1, 3); c.src_is_cr = 1; c.src_cr = CR_ROW0; issue(c);
    chk(dut.mem[3], '0, "copy row0");
    chk(dut.cr[CR_ROW0], '0, "row0 still zero");
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
