// pim_mul_seq: AAP sequencer for in-subarray multiplication and addition.
//
// What it does: on start it issues, one per clock, the AAPs that multiply two
// N_BITS-bit unsigned operands stored bit-transposed in every column of a
// subarray (bit k of A in row a_base+k, bit k of B in row b_base+k) and leave
// the 2*N_BITS-bit product in rows p_base.. (bit k in p_base+k). The stream is
// broadcast to every subarray of a bank, so all columns of all subarrays
// multiply at once. In SEQ_ADD mode it instead adds the two N_BITS-bit operands
// into p_base..p_base+N_BITS (the majority adder the paper uses for residual
// additions in its reserved bank).
//
// How it works (multiplication, the paper's scheme for n > 2, Sec. III-B and
// Fig. 12): product column c gathers the partial products A_i AND B_j with
// i + j = c (Fig. 10). A running column sum of IW bits lives in the
// intermediate rows I (i_base..). For each partial product:
//   copy A_i -> A, copy B_j -> A-1, AND-WL (A, A-1 now hold A_i B_j),
//   copy row0 -> Cin and Cin-1, then a bit-serial majority add of that one
//   bit to I: per bit k, (k > 0: copy row0 -> A, A-1), copy I_k -> B, B-1,
//   MAJ3 (carry into Cin and the Cout rows), MAJ5 -> I_k (sum),
//   and (not after the last bit) copy Cin -> Cin-1.
// When a column is complete its LSB is copied from I to P_c and that I row is
// cleared; instead of shifting the remaining bits down, the I rows are used as
// a circular buffer whose start advances by one (a choice of this design that
// saves AAPs). After the last column, P_{2n-1} takes the carry left in I.
//
// AAP count of a multiplication: IW + N^2 (5 IW + 2) + 2 (2N-1) + 1, which is
// 290 for N = 4. The paper gives 3n^2 + 4(n-1)^3 + 4(n-1) (168 for n = 4);
// its step list leaves out copies that the destructive majority activations
// need here, so the count differs. Addition takes 5N + 1 AAPs (paper: 4n+1).
//
// IW, the width of the column sum: the paper uses n-1 rows; this design uses
// max(n-1, clog2(2n)), which is n-1 for n = 4 but is one wider for n = 3,
// where n-1 bits would overflow (7 x 7 needs a column sum of 4 in column 2).
//
// The row0 bit of cmd.dst_cr is always 0 (row0 is never written), so synthesis
// reports it as a constant output bit.
//
// Interface: start (with mode and the four row bases) is taken when idle;
// cmd_valid/cmd carry one AAP per clock; busy while running; done pulses for
// one clock after the last AAP; aap_count holds the number of AAPs issued by
// the last operation.
module pim_mul_seq
  import pim_pkg::*;
#(
  parameter int unsigned N_BITS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  seq_mode_e         mode,
  input  logic [ROW_AW-1:0] a_base,
  input  logic [ROW_AW-1:0] b_base,
  input  logic [ROW_AW-1:0] p_base,
  input  logic [ROW_AW-1:0] i_base,
  output logic              cmd_valid,
  output aap_cmd_t          cmd,
  output logic              busy,
  output logic              done,
  output logic [15:0]       aap_count
);

  localparam int unsigned CLW = $clog2(2 * N_BITS);
  localparam int unsigned IW  = (N_BITS - 1 > CLW) ? N_BITS - 1 : CLW;
  localparam int unsigned CW  = $clog2(2 * N_BITS + 1);
  localparam int unsigned KW  = $clog2(IW + N_BITS + 1);

  typedef enum logic [4:0] {
    S_IDLE, S_INIT_I,
    S_T_CPA, S_T_CPB, S_T_AND, S_T_CIN,
    S_B_ZA, S_B_LDI, S_B_MAJ3, S_B_MAJ5, S_B_CCP,
    S_C_OUT, S_C_CLR, S_FIN,
    S_A_CIN, S_A_LDA, S_A_LDB, S_A_MAJ3, S_A_MAJ5, S_A_CCP, S_A_FIN
  } state_e;

  state_e            st;
  logic [ROW_AW-1:0] ra, rb, rp, ri;
  logic [CW-1:0]     col;     // product column
  logic [CW-1:0]     ti;      // index i of the current partial product A_i B_j
  logic [KW-1:0]     k;       // bit of the serial add / init counter
  logic [KW-1:0]     off;     // start of the circular I buffer

  logic [CW-1:0]     i_hi;    // last i of this column
  logic [CW-1:0]     i_lo_next; // first i of the next column
  logic [KW-1:0]     isum;
  logic [ROW_AW-1:0] i_row;   // row of I bit k
  logic [ROW_AW-1:0] i_row0;  // row of I bit 0

  always_comb begin
    i_hi      = (col > CW'(N_BITS - 1)) ? CW'(N_BITS - 1) : col;
    i_lo_next = (col + 1 > CW'(N_BITS - 1)) ? col + 1 - CW'(N_BITS - 1) : '0;
    isum      = off + k;
    if (isum >= KW'(IW)) isum = isum - KW'(IW);
    i_row     = ri + ROW_AW'(isum);
    i_row0    = ri + ROW_AW'(off);
  end

  // Command for the current state.
  function automatic aap_cmd_t copy_cmd(logic from_cr, crow_e scr, logic [ROW_AW-1:0] srow,
                                        logic den, logic [ROW_AW-1:0] drow, logic [NCR-1:0] dcr);
    aap_cmd_t r;
    r = AAP_IDLE;
    r.op = AAP_COPY; r.src_is_cr = from_cr; r.src_cr = scr; r.src_row = srow;
    r.dst_en = den; r.dst_row = drow; r.dst_cr = dcr;
    return r;
  endfunction

  always_comb begin
    cmd = AAP_IDLE;
    unique case (st)
      S_INIT_I: cmd = copy_cmd(1'b1, CR_ROW0, '0, 1'b1, ri + ROW_AW'(k), '0);
      S_T_CPA:  cmd = copy_cmd(1'b0, CR_A, ra + ROW_AW'(ti), 1'b0, '0, M_A);
      S_T_CPB:  cmd = copy_cmd(1'b0, CR_A, rb + ROW_AW'(col - ti), 1'b0, '0, M_A1);
      S_T_AND:  cmd.op = AAP_AND_A;
      S_T_CIN,
      S_A_CIN:  cmd = copy_cmd(1'b1, CR_ROW0, '0, 1'b0, '0, M_CIN | M_CIN1);
      S_B_ZA:   cmd = copy_cmd(1'b1, CR_ROW0, '0, 1'b0, '0, M_A | M_A1);
      S_B_LDI:  cmd = copy_cmd(1'b0, CR_A, i_row, 1'b0, '0, M_B | M_B1);
      S_B_MAJ3,
      S_A_MAJ3: begin cmd.op = AAP_MAJ3; cmd.dst_cr = M_COUT | M_COUT1; end
      S_B_MAJ5: begin cmd.op = AAP_MAJ5; cmd.dst_en = 1'b1; cmd.dst_row = i_row; end
      S_B_CCP,
      S_A_CCP:  cmd = copy_cmd(1'b1, CR_CIN, '0, 1'b0, '0, M_CIN1);
      S_C_OUT:  cmd = copy_cmd(1'b0, CR_A, i_row0, 1'b1, rp + ROW_AW'(col), '0);
      S_C_CLR:  cmd = copy_cmd(1'b1, CR_ROW0, '0, 1'b1, i_row0, '0);
      S_FIN:    cmd = copy_cmd(1'b0, CR_A, i_row0, 1'b1, rp + ROW_AW'(2 * N_BITS - 1), '0);
      S_A_LDA:  cmd = copy_cmd(1'b0, CR_A, ra + ROW_AW'(k), 1'b0, '0, M_A | M_A1);
      S_A_LDB:  cmd = copy_cmd(1'b0, CR_A, rb + ROW_AW'(k), 1'b0, '0, M_B | M_B1);
      S_A_MAJ5: begin cmd.op = AAP_MAJ5; cmd.dst_en = 1'b1; cmd.dst_row = rp + ROW_AW'(k); end
      S_A_FIN:  cmd = copy_cmd(1'b1, CR_CIN, '0, 1'b1, rp + ROW_AW'(N_BITS), '0);
      default:  cmd = AAP_IDLE;
    endcase
  end

  assign cmd_valid = (st != S_IDLE);
  assign busy      = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ra <= '0; rb <= '0; rp <= '0; ri <= '0;
      col <= '0; ti <= '0; k <= '0; off <= '0; done <= 1'b0; aap_count <= '0;
    end else begin
      done <= 1'b0;
      if (st != S_IDLE) aap_count <= aap_count + 16'd1;
      unique case (st)
        S_IDLE: if (start) begin
          ra <= a_base; rb <= b_base; rp <= p_base; ri <= i_base;
          col <= '0; ti <= '0; k <= '0; off <= '0; aap_count <= '0;
          st <= (mode == SEQ_ADD) ? S_A_CIN : S_INIT_I;
        end
        // ---------------- multiplication ----------------
        S_INIT_I: begin
          if (k == KW'(IW - 1)) begin k <= '0; st <= S_T_CPA; end
          else k <= k + 1'b1;
        end
        S_T_CPA:  st <= S_T_CPB;
        S_T_CPB:  st <= S_T_AND;
        S_T_AND:  st <= S_T_CIN;
        S_T_CIN:  begin k <= '0; st <= S_B_LDI; end
        S_B_ZA:   st <= S_B_LDI;
        S_B_LDI:  st <= S_B_MAJ3;
        S_B_MAJ3: st <= S_B_MAJ5;
        S_B_MAJ5: begin
          if (k == KW'(IW - 1)) begin
            k <= '0;
            if (ti == i_hi) st <= S_C_OUT;
            else begin ti <= ti + 1'b1; st <= S_T_CPA; end
          end else st <= S_B_CCP;
        end
        S_B_CCP:  begin k <= k + 1'b1; st <= S_B_ZA; end
        S_C_OUT:  st <= S_C_CLR;
        S_C_CLR:  begin
          off <= (off == KW'(IW - 1)) ? '0 : off + 1'b1;
          if (col == CW'(2 * N_BITS - 2)) st <= S_FIN;
          else begin col <= col + 1'b1; ti <= i_lo_next; st <= S_T_CPA; end
        end
        S_FIN:    begin st <= S_IDLE; done <= 1'b1; end
        // ---------------- addition ----------------
        S_A_CIN:  begin k <= '0; st <= S_A_LDA; end
        S_A_LDA:  st <= S_A_LDB;
        S_A_LDB:  st <= S_A_MAJ3;
        S_A_MAJ3: st <= S_A_MAJ5;
        S_A_MAJ5: st <= (k == KW'(N_BITS - 1)) ? S_A_FIN : S_A_CCP;
        S_A_CCP:  begin k <= k + 1'b1; st <= S_A_LDA; end
        S_A_FIN:  begin st <= S_IDLE; done <= 1'b1; end
        default:  st <= S_IDLE;
      endcase
    end
  end

endmodule
