// tb_pim_bank: one bank at reduced size (2 subarrays of 64 x 64, 4 taps,
// 16-entry transpose unit). It loads random 4-bit activations and weights
// through the row-write port, multiplies (checking the AAP count), reduces
// MACs of 6 columns in blocks of 8 (so masked leaves and forwarding units are
// used), runs ReLU/BatchNorm/Quantize with constants that make the arithmetic
// visible, sends the bit planes to the global buffer and compares them with a
// software model. A second pass enables 2-element max pooling, and a BK_ADD
// is checked column by column.
module tb_pim_bank;
  import pim_pkg::*;
  localparam int NS = 2, R = 64, C = 64, N = 4, T = 4, TD = 16, TW = 8, GD = 8;
  localparam int MUL_AAPS = 3 + N*N*(5*3 + 2) + 2*(2*N-1) + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, done; bank_cmd_t cmd; sfu_cfg_t sfu_cfg;
  logic wr_en; logic [7:0] wr_sub, wr_seg; logic [15:0] wr_row; logic [TD-1:0] wr_data;
  logic [TD-1:0] gb_head; logic gb_empty, gb_pop;
  logic [15:0] aap_count, results, forwards;
  pim_bank #(.N_SUB(NS), .ROWS(R), .COLS(C), .N_BITS(N), .N_TAP(T), .TR_DEPTH(TD),
             .TR_WIDTH(TW), .GB_DEPTH(GD)) dut (.*);

  int checks = 0, failures = 0;
  logic [N-1:0] av [NS][C];
  logic [N-1:0] bv [NS][C];
  int exp_q [32];
  int exp_mac [$];   // raw MACs expected at the SFU input, in order

  // every accumulator value handed to the SFU chain must equal the exact MAC
  always @(posedge clk) if (rst_n && dut.sfu_in_v) begin
    checks++;
    if (exp_mac.size() == 0) begin failures++; $display("FAIL unexpected MAC"); end
    else begin
      int e; e = exp_mac.pop_front();
      if (int'(dut.sfu_in) != e) begin failures++; $display("FAIL MAC %0d exp %0d", dut.sfu_in, e); end
    end
  end

  task automatic write_row(int s, int row, logic [C-1:0] v);
    for (int g = 0; g < C / TD; g++) begin
      @(negedge clk); wr_en = 1; wr_sub = 8'(s); wr_row = 16'(row); wr_seg = 8'(g); wr_data = v[g*TD +: TD];
    end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic run(bank_cmd_t cc, output int cycles);
    cycles = 0;
    @(negedge clk); cmd = cc; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  function automatic int sfu(int mac, sfu_cfg_t f);
    longint y;
    y = (mac < 0) ? 0 : mac;
    y = ((y - longint'(f.bn_mean)) * longint'(f.bn_scale)) >>> f.bn_shift;
    y = y + longint'(f.bn_beta);
    y = y >>> f.q_shift;
    if (y < 0) y = 0;
    if (y > 15) y = 15;
    return int'(y);
  endfunction

  task automatic send_and_check(int n_res);
    bank_cmd_t cc; int cyc;
    cc = '0; cc.op = BK_SEND;
    run(cc, cyc);
    for (int b = 0; b < N; b++) begin
      logic [TD-1:0] e, m;
      e = '0; m = '0;
      for (int i = 0; i < n_res; i++) begin e[i] = exp_q[i][b]; m[i] = 1'b1; end
      checks++;
      if (gb_empty || (gb_head & m) != e) begin   // entries past n_res hold older results
        failures++; $display("FAIL plane %0d got %h exp %h", b, gb_head, e);
      end
      @(negedge clk); gb_pop = 1; @(negedge clk); gb_pop = 0;
    end
    checks++; if (!gb_empty) begin failures++; $display("FAIL extra rows in buffer"); end
  endtask

  initial begin
    bank_cmd_t cc; int cyc, nres;
    cmd_valid = 0; cmd = '0; wr_en = 0; wr_sub = 0; wr_row = 0; wr_seg = 0; wr_data = 0; gb_pop = 0;
    sfu_cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int s = 0; s < NS; s++) begin
      for (int c = 0; c < C; c++) begin av[s][c] = N'($urandom); bv[s][c] = N'($urandom); end
      for (int b = 0; b < N; b++) begin
        logic [C-1:0] ra, rb;
        for (int c = 0; c < C; c++) begin ra[c] = av[s][c][b]; rb[c] = bv[s][c][b]; end
        write_row(s, b, ra); write_row(s, 8 + b, rb);
      end
    end
    // multiply
    cc = '0; cc.op = BK_MUL; cc.a_base = 0; cc.b_base = 8; cc.p_base = 16; cc.i_base = 32;
    run(cc, cyc);
    checks++; if (aap_count != 16'(MUL_AAPS)) begin failures++; $display("FAIL aap %0d", aap_count); end
    // reduce: MACs of 6 columns in blocks of 8
    sfu_cfg.bn_mean = 24'sd40; sfu_cfg.bn_scale = 16'sd3; sfu_cfg.bn_shift = 5'd1;
    sfu_cfg.bn_beta = -24'sd20; sfu_cfg.q_shift = 5'd6; sfu_cfg.pool_en = 0; sfu_cfg.pool_window = 1;
    nres = 0;
    for (int s = 0; s < NS; s++)
      for (int k = 0; k < C / 8; k++) begin
        int mac; mac = 0;
        for (int c = 0; c < 6; c++) mac += int'(av[s][8*k + c]) * int'(bv[s][8*k + c]);
        exp_q[nres++] = sfu(mac, sfu_cfg);
        exp_mac.push_back(mac);
      end
    cc = '0; cc.op = BK_MAC; cc.p_base = 16; cc.n_sub = 4'(NS - 1); cc.tap_level = 3;
    cc.n_groups = 8'((C / 8) / T - 1); cc.mac_size = 13'd6;
    run(cc, cyc);
    checks++; if (int'(results) != nres) begin failures++; $display("FAIL results %0d", results); end
    checks++; if (forwards == 0) begin failures++; $display("FAIL no forwarding units"); end
    send_and_check(nres);
    // second pass with max pooling over pairs
    sfu_cfg.pool_en = 1; sfu_cfg.pool_window = 2;
    for (int i = 0; i < nres; i++) begin
      int mac; mac = 0;
      for (int c = 0; c < 6; c++) mac += int'(av[i / 8][8*(i % 8) + c]) * int'(bv[i / 8][8*(i % 8) + c]);
      exp_mac.push_back(mac);
    end
    for (int i = 0; i < nres / 2; i++) exp_q[i] = (exp_q[2*i] > exp_q[2*i+1]) ? exp_q[2*i] : exp_q[2*i+1];
    run(cc, cyc);
    checks++; if (int'(results) != nres / 2) begin failures++; $display("FAIL pooled results %0d", results); end
    send_and_check(nres / 2);
    checks++; if (exp_mac.size() != 0) begin failures++; $display("FAIL MACs missing"); end
    // remaining MACs: group 1 of subarray 1 only (taps 4..7 of that subarray)
    sfu_cfg.pool_en = 0; sfu_cfg.pool_window = 1;
    for (int i = 0; i < 4; i++) begin
      int mac; mac = 0;
      for (int c = 0; c < 6; c++) mac += int'(av[1][8*(4 + i) + c]) * int'(bv[1][8*(4 + i) + c]);
      exp_mac.push_back(mac);
      exp_q[i] = sfu(mac, sfu_cfg);
    end
    cc.sub_first = 4'd1; cc.grp_first = 8'd1;
    run(cc, cyc);
    checks++; if (results != 16'd4) begin failures++; $display("FAIL partial results %0d", results); end
    send_and_check(4);
    checks++; if (exp_mac.size() != 0) begin failures++; $display("FAIL MACs missing"); end
    // in-subarray addition
    cc = '0; cc.op = BK_ADD; cc.a_base = 0; cc.b_base = 8; cc.p_base = 40;
    run(cc, cyc);
    for (int s = 0; s < NS; s++)
      for (int c = 0; c < C; c++) begin
        int got; got = 0;
        for (int b = 0; b <= N; b++) got |= int'(s == 0 ? dut.g_sub[0].u_sa.mem[40 + b][c]
                                                        : dut.g_sub[1].u_sa.mem[40 + b][c]) << b;
        checks++;
        if (got != int'(av[s][c]) + int'(bv[s][c])) begin failures++; $display("FAIL add"); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
