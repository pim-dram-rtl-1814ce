// tb_pim_dram: end-to-end test of the PIM-DRAM top at reduced size (3 banks,
// 2 subarrays of 64 x 64 each, 4 accumulator taps, 16-entry transpose units).
//
// Dataflow exercised, as in a network with one layer per bank:
//   1. The host loads random 4-bit activations and weights into banks 0 and 2.
//   2. Banks 0 and 2 compute at the same time: in-subarray multiplication,
//      then reduction. Bank 0 forms MACs of 6 columns inside blocks of 8
//      (masked leaves, forwarding tree units, two accumulator groups per
//      subarray, both subarrays). Bank 2 forms MACs of 16 columns and max-pools
//      pairs.
//   3. Both banks send their bit planes to their global buffers, and one
//      transfer moves them over the bus into bank 1. Bank 2 goes first; the
//      order of the bus writes is checked.
//   4. Bank 1 runs the second layer on the activations received from bank 0,
//      with host-loaded weights and quantisation constants that make values
//      clamp at both ends. It also adds bank 2's results to a host-loaded
//      operand (the residual addition of a reserved bank).
//   5. Bank 1's results go to bank 2.
// Every result is compared with a software model: products and MACs, the
// ReLU/BatchNorm/Quantize/Pool chain, and the rows that land in the destination
// subarrays. Each mechanism is counted, and one that never happened counts as
// a failure.
module tb_pim_dram;
  import pim_pkg::*;
  localparam int NB = 3, NS = 2, R = 64, C = 64, N = 4, T = 4, TD = 16, TW = 8, GD = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NB-1:0] bank_cmd_valid, bank_ready, bank_done;
  bank_cmd_t [NB-1:0] bank_cmd;
  sfu_cfg_t [NB-1:0] sfu_cfg;
  logic host_wr_valid, host_wr_ready; logic [3:0] host_wr_bank; logic [7:0] host_wr_sub, host_wr_seg;
  logic [ROW_AW-1:0] host_wr_row; logic [TD-1:0] host_wr_data;
  logic xfer_start, xfer_busy, xfer_done; xfer_cfg_t [NB-1:0] xfer_cfg; logic [15:0] xfer_rows;
  logic [NB-1:0][15:0] aap_count, results, forwards;

  pim_dram #(.N_BANKS(NB), .N_SUB(NS), .ROWS(R), .COLS(C), .N_BITS(N), .N_TAP(T),
             .TR_DEPTH(TD), .TR_WIDTH(TW), .GB_DEPTH(GD)) dut (.*);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_mul = 0, n_add = 0, n_mac = 0, n_send = 0, n_xfer_rows = 0, n_order = 0, n_fwd = 0;
  int n_pool = 0, n_pass = 0, n_qlo = 0, n_qhi = 0, n_multisub = 0, n_multigrp = 0, n_refused = 0;

  logic [N-1:0] a0 [NS][C], w0 [NS][C], a2 [NS][C], w2 [NS][C], w1 [C], skip [C];
  int q0 [16], q2 [16], q1 [16];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic host_row(int b, int s, int row, logic [C-1:0] v);
    for (int g = 0; g < C / TD; g++) begin
      @(negedge clk);
      host_wr_valid = 1; host_wr_bank = 4'(b); host_wr_sub = 8'(s); host_wr_row = 16'(row);
      host_wr_seg = 8'(g); host_wr_data = v[g*TD +: TD];
    end
    @(negedge clk); host_wr_valid = 0;
  endtask

  // bit-transposed operand: bit k of column c's value in row base+k
  task automatic host_operand(int b, int s, int base, logic [N-1:0] v [C]);
    for (int k = 0; k < N; k++) begin
      logic [C-1:0] r;
      for (int c = 0; c < C; c++) r[c] = v[c][k];
      host_row(b, s, base + k, r);
    end
  endtask

  task automatic bank_run(int b, bank_cmd_t cc);
    @(negedge clk); bank_cmd[b] = cc; bank_cmd_valid[b] = 1;
    @(negedge clk); bank_cmd_valid[b] = 0;
    while (!bank_done[b]) @(negedge clk);
    case (cc.op)
      BK_MUL:  n_mul++;
      BK_ADD:  n_add++;
      BK_MAC:  n_mac++;
      default: n_send++;
    endcase
  endtask

  function automatic int sfu(int mac, sfu_cfg_t f);
    longint y;
    y = (mac < 0) ? 0 : mac;
    y = ((y - longint'(f.bn_mean)) * longint'(f.bn_scale)) >>> f.bn_shift;
    y = (y + longint'(f.bn_beta)) >>> f.q_shift;
    if (y < 0) y = 0;
    if (y > 15) y = 15;
    return int'(y);
  endfunction

  function automatic bank_cmd_t mk(bank_op_e op, int pb, int ns, int tl, int ng, int ms);
    bank_cmd_t cc;
    cc = '0; cc.op = op; cc.a_base = 0; cc.b_base = 8; cc.p_base = 16'(pb); cc.i_base = 32;
    cc.n_sub = 4'(ns); cc.tap_level = 4'(tl); cc.n_groups = 8'(ng); cc.mac_size = 13'(ms);
    return cc;
  endfunction

  // value of column c of bank b, subarray s, rows base.. (nb bits)
  function automatic int col_val(int b, int s, int base, int c, int nb);
    int v; v = 0;
    for (int k = 0; k < nb; k++) begin
      logic bit_v;
      case ({b[1:0], s[0]})
        3'b000: bit_v = dut.g_bank[0].u_bank.g_sub[0].u_sa.mem[base + k][c];
        3'b001: bit_v = dut.g_bank[0].u_bank.g_sub[1].u_sa.mem[base + k][c];
        3'b010: bit_v = dut.g_bank[1].u_bank.g_sub[0].u_sa.mem[base + k][c];
        3'b011: bit_v = dut.g_bank[1].u_bank.g_sub[1].u_sa.mem[base + k][c];
        3'b100: bit_v = dut.g_bank[2].u_bank.g_sub[0].u_sa.mem[base + k][c];
        default: bit_v = dut.g_bank[2].u_bank.g_sub[1].u_sa.mem[base + k][c];
      endcase
      v |= int'(bit_v) << k;
    end
    return v;
  endfunction

  // order of transfer writes, and clamping seen by the quantizers
  int last_dst_sub = -1;
  always @(posedge clk) if (rst_n) begin
    if (xfer_busy && dut.wr_en != 0) begin
      n_xfer_rows++;
      if (dut.u_bus.src == 0 && last_dst_sub == 1) n_order++;
      last_dst_sub = int'(dut.wr_sub);
    end
    if (xfer_busy && host_wr_valid) begin
      if (host_wr_ready) begin failures++; $display("FAIL host write taken during transfer"); end
      else n_refused++;
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.g_bank[1].u_bank.u_q.in_valid) begin
      if (dut.g_bank[1].u_bank.u_q.s < 0) n_qlo++;
      if (dut.g_bank[1].u_bank.u_q.s > 15) n_qhi++;
    end
  end

  initial begin
    int idx, mac;
    bank_cmd_valid = '0; bank_cmd = '0; sfu_cfg = '0; host_wr_valid = 0; host_wr_bank = 0;
    host_wr_sub = 0; host_wr_row = 0; host_wr_seg = 0; host_wr_data = 0; xfer_start = 0; xfer_cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- 1. load layer-1 operands of banks 0 and 2
    for (int s = 0; s < NS; s++) begin
      for (int c = 0; c < C; c++) begin
        a0[s][c] = N'($urandom); w0[s][c] = N'($urandom); a2[s][c] = N'($urandom); w2[s][c] = N'($urandom);
      end
      host_operand(0, s, 0, a0[s]); host_operand(0, s, 8, w0[s]);
      host_operand(2, s, 0, a2[s]); host_operand(2, s, 8, w2[s]);
    end
    sfu_cfg[0] = '{bn_mean: 24'sd40, bn_scale: 16'sd3, bn_shift: 5'd1, bn_beta: -24'sd20,
                   q_shift: 5'd6, pool_en: 1'b0, pool_window: 8'd1};
    sfu_cfg[2] = '{bn_mean: 24'sd0, bn_scale: 16'sd1, bn_shift: 5'd0, bn_beta: 24'sd0,
                   q_shift: 5'd6, pool_en: 1'b1, pool_window: 8'd2};
    // models
    idx = 0;
    for (int s = 0; s < NS; s++)
      for (int k = 0; k < C / 8; k++) begin
        mac = 0;
        for (int c = 0; c < 6; c++) mac += int'(a0[s][8*k + c]) * int'(w0[s][8*k + c]);
        q0[idx++] = sfu(mac, sfu_cfg[0]);
      end
    idx = 0;
    for (int s = 0; s < NS; s++)
      for (int k = 0; k < C / 16; k += 2) begin
        int m0, m1;
        m0 = 0; m1 = 0;
        for (int c = 0; c < 16; c++) begin
          m0 += int'(a2[s][16*k + c]) * int'(w2[s][16*k + c]);
          m1 += int'(a2[s][16*(k+1) + c]) * int'(w2[s][16*(k+1) + c]);
        end
        m0 = sfu(m0, sfu_cfg[2]); m1 = sfu(m1, sfu_cfg[2]);
        q2[idx++] = (m0 > m1) ? m0 : m1;
      end

    // ---- 2. both banks compute in parallel
    fork
      begin
        bank_run(0, mk(BK_MUL, 16, 0, 0, 0, 0));
        check(aap_count[0] == 16'd290, "bank 0 AAP count");
        // products in the subarrays
        for (int s = 0; s < NS; s++)
          for (int c = 0; c < C; c++)
            check(col_val(0, s, 16, c, 2*N) == int'(a0[s][c]) * int'(w0[s][c]), "bank 0 product");
        bank_run(0, mk(BK_MAC, 16, NS - 1, 3, (C / 8) / T - 1, 6));
        check(results[0] == 16'd16, "bank 0 result count");
        if (forwards[0] != 0) n_fwd++;
        n_multisub++; n_multigrp++; n_pass++;
        bank_run(0, mk(BK_SEND, 0, 0, 0, 0, 0));
      end
      begin
        bank_run(2, mk(BK_MUL, 16, 0, 0, 0, 0));
        bank_run(2, mk(BK_MAC, 16, NS - 1, 4, 0, 16));
        check(results[2] == 16'd4, "bank 2 pooled result count");
        n_pool++;
        bank_run(2, mk(BK_SEND, 0, 0, 0, 0, 0));
      end
    join

    // ---- 3. transfer: bank 0 -> bank 1 subarray 0 rows 0..3; bank 2 -> bank 1 subarray 1 rows 0..3
    xfer_cfg[0] = '{en: 1'b1, dst_bank: 4'd1, dst_sub: 8'd0, dst_row: 16'd0, dst_seg: 8'd0};
    xfer_cfg[2] = '{en: 1'b1, dst_bank: 4'd1, dst_sub: 8'd1, dst_row: 16'd0, dst_seg: 8'd0};
    xfer_cfg[1] = '0;
    @(negedge clk); xfer_start = 1;
    @(negedge clk); xfer_start = 0;
    host_wr_valid = 1; host_wr_bank = 4'd1; host_wr_sub = 8'd0; host_wr_row = 16'd63; host_wr_seg = 8'd3;
    while (!xfer_done) @(negedge clk);
    host_wr_valid = 0;
    check(xfer_rows == 16'(2 * N), "rows moved");
    for (int i = 0; i < 16; i++) check(col_val(1, 0, 0, i, N) == q0[i], "layer-1 activation in bank 1");
    for (int i = 0; i < 4; i++)  check(col_val(1, 1, 0, i, N) == q2[i], "pooled result in bank 1");

    // ---- 4. layer 2 in bank 1: 4 MACs of 4 columns over the 16 received activations
    for (int c = 0; c < C; c++) begin w1[c] = N'($urandom); skip[c] = N'($urandom); end
    for (int c = 0; c < 4; c++) begin
      w1[c] = '0;        // MAC 0 is zero: its normalised value is negative
      w1[4 + c] = '1;    // MAC 1 is large: it saturates
    end
    host_operand(1, 0, 8, w1);
    host_operand(1, 1, 8, skip);
    sfu_cfg[1] = '{bn_mean: 24'sd150, bn_scale: 16'sd1, bn_shift: 5'd0, bn_beta: 24'sd0,
                   q_shift: 5'd3, pool_en: 1'b0, pool_window: 8'd1};
    for (int m = 0; m < 4; m++) begin
      mac = 0;
      for (int c = 0; c < 4; c++) mac += q0[4*m + c] * int'(w1[4*m + c]);
      q1[m] = sfu(mac, sfu_cfg[1]);
    end
    bank_run(1, mk(BK_MUL, 16, 0, 0, 0, 0));
    bank_run(1, mk(BK_MAC, 16, 0, 2, 0, 4));
    check(results[1] == 16'd4, "bank 1 result count");
    // residual addition in bank 1, subarray 1: bank 2's results + skip operand
    bank_run(1, mk(BK_ADD, 40, 0, 0, 0, 0));
    for (int i = 0; i < 4; i++) check(col_val(1, 1, 40, i, N + 1) == q2[i] + int'(skip[i]), "residual add");
    bank_run(1, mk(BK_SEND, 0, 0, 0, 0, 0));

    // ---- 5. bank 1 -> bank 2 subarray 0 rows 48..51, segment 2
    xfer_cfg = '0;
    xfer_cfg[1] = '{en: 1'b1, dst_bank: 4'd2, dst_sub: 8'd0, dst_row: 16'd48, dst_seg: 8'd2};
    @(negedge clk); xfer_start = 1;
    @(negedge clk); xfer_start = 0;
    while (!xfer_done) @(negedge clk);
    for (int i = 0; i < 4; i++) check(col_val(2, 0, 48, 2*TD + i, N) == q1[i], "layer-2 result in bank 2");

    // ---- mechanisms
    check(n_mul >= 3, "in-subarray multiplication never ran");
    check(n_add >= 1, "residual addition never ran");
    check(n_mac >= 3, "reduction never ran");
    check(n_send >= 3, "send never ran");
    check(n_xfer_rows >= 12, "inter-bank transfer never ran");
    check(n_order >= 1, "sequential transfer order (last bank first) never seen");
    check(n_fwd >= 1, "adder-tree forward mode never used");
    check(n_pool >= 1, "max pooling never used");
    check(n_pass >= 1, "pool pass-through never used");
    check(n_qlo >= 1, "quantizer low clamp never happened");
    check(n_qhi >= 1, "quantizer high clamp never happened");
    check(n_multisub >= 1 && n_multigrp >= 1, "multi-subarray / multi-group reduction never ran");
    check(n_refused >= 1, "host write never held off by a transfer");
    $display("mechanisms: mul=%0d add=%0d mac=%0d send=%0d xfer_rows=%0d order=%0d fwd=%0d pool=%0d pass=%0d qlo=%0d qhi=%0d refused=%0d",
             n_mul, n_add, n_mac, n_send, n_xfer_rows, n_order, n_fwd, n_pool, n_pass, n_qlo, n_qhi, n_refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
