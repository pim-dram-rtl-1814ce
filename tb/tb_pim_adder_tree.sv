// tb_pim_adder_tree: random rows, masks and per-unit add/forward settings;
// every tap of every level is compared with a software model of the tree
// evaluated level by level.
module tb_pim_adder_tree;
  localparam int N = 64, T = 8, L = 6, SW = 7;
  logic [N-1:0] leaf, leaf_en;
  logic [N-2:0] node_add;
  logic [2:0]   tap_level;
  logic [L-1:0] tap_base;
  logic [T-1:0][SW-1:0] tap_sum;
  pim_adder_tree #(.N_IN(N), .N_TAP(T)) dut (.*);
  int checks = 0, failures = 0;
  int m [L+1][N];
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    for (int it = 0; it < 300; it++) begin
      leaf = {$urandom, $urandom};
      leaf_en = (it % 3 == 0) ? '1 : {$urandom, $urandom};
      node_add = (it % 2 == 0) ? '1 : {$urandom, $urandom};
      tap_level = 3'($urandom_range(0, L));
      tap_base = L'($urandom_range(0, (N >> tap_level) - 1));
      // reference
      for (int i = 0; i < N; i++) m[0][i] = leaf[i] & leaf_en[i];
      for (int l = 1; l <= L; l++) begin
        int ofs;
        ofs = N - (N >> (l - 1));
        for (int j = 0; j < (N >> l); j++)
          m[l][j] = node_add[ofs + j] ? m[l-1][2*j] + m[l-1][2*j+1] : m[l-1][2*j];
      end
      #1;
      for (int t = 0; t < T; t++) begin
        int idx, e;
        idx = int'(tap_base) + t;
        e = (idx < (N >> tap_level)) ? m[tap_level][idx] : 0;
        checks++;
        if (int'(tap_sum[t]) != e) begin
          failures++; $display("FAIL lvl %0d tap %0d got %0d exp %0d", tap_level, t, tap_sum[t], e);
        end
      end
    end
    // full-tree popcount at the root
    leaf = '1; leaf_en = '1; node_add = '1; tap_level = 3'(L); tap_base = '0; #1;
    checks++; if (tap_sum[0] != SW'(N)) begin failures++; $display("FAIL root popcount"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
