// sw_prog_pkg -- Smith-Waterman score program for the ReCAM microcontroller,
// and a plain software reference of the same recurrence.
//
// build_program() assembles the antidiagonal loop of the paper's S-W
// pseudo-code (17 steps per iteration) for sequences of lengths n (sequence
// A, one base per row) and m (sequence B, streamed into the top row one base
// per iteration from the BSTO field of rows 0..m-1). Row r at antidiagonal
// d holds matrix cell (i = r+1, j = d-i). Active rows are [lo, hi] with
// lo = max(0, d-1-m) and hi = min(n-1, d-2); the arithmetic steps also run
// on row lo-1, which the vertical (E) recurrence of row lo needs in the
// last section of the matrix. Score fields are 32-bit two's complement.
package sw_prog_pkg;
  import recam_pkg::*;

  // register map of the program
  localparam int R_MAX = 1, R_D = 2, R_END = 3, R_RIGHT = 4, R_MID = 5, R_LEFT = 6;
  localparam int R_NM1 = 7, R_MP1 = 8, R_T = 9, R_LO = 10, R_HI = 11, R_LOX = 12;
  localparam int R_E = 13, R_F = 14, R_TMP = 15, R_SA = 16, R_SB = 17, R_BS = 18;
  localparam int R_GF = 19, R_GE = 20, R_ONE = 21, R_TWO = 22, R_BV = 23, R_MP2 = 25;

  function automatic void build_program(int n, int m, int sc_match, int sc_mis, int gf, int ge,
                                        ref instr_t prog[$]);
    int loop_pc, blt_pc, jmp_pc;
    prog.delete();
    prog.push_back(mk_instr(I_LI, R_MAX, 0, 0, 0, 0));
    prog.push_back(mk_instr(I_LI, R_D, 0, 0, 0, 2));
    prog.push_back(mk_instr(I_LI, R_END, 0, 0, 0, n + m + 1));
    prog.push_back(mk_instr(I_LI, R_RIGHT, 0, 0, 0, COL_AD0));
    prog.push_back(mk_instr(I_LI, R_MID, 0, 0, 0, COL_AD2));
    prog.push_back(mk_instr(I_LI, R_LEFT, 0, 0, 0, COL_AD1));
    prog.push_back(mk_instr(I_LI, R_NM1, 0, 0, 0, n - 1));
    prog.push_back(mk_instr(I_LI, R_MP1, 0, 0, 0, m + 1));
    prog.push_back(mk_instr(I_LI, R_MP2, 0, 0, 0, m + 2));
    prog.push_back(mk_instr(I_LI, R_E, 0, 0, 0, COL_E));
    prog.push_back(mk_instr(I_LI, R_F, 0, 0, 0, COL_F));
    prog.push_back(mk_instr(I_LI, R_TMP, 0, 0, 0, COL_TMP));
    prog.push_back(mk_instr(I_LI, R_SA, 0, 0, 0, COL_SEQA));
    prog.push_back(mk_instr(I_LI, R_SB, 0, 0, 0, COL_SEQB));
    prog.push_back(mk_instr(I_LI, R_BS, 0, 0, 0, COL_BSTO));
    prog.push_back(mk_instr(I_LI, R_GF, 0, 0, 0, gf));
    prog.push_back(mk_instr(I_LI, R_GE, 0, 0, 0, ge));
    prog.push_back(mk_instr(I_LI, R_ONE, 0, 0, 0, 1));
    prog.push_back(mk_instr(I_LI, R_TWO, 0, 0, 0, 2));
    // line 1: clear the working fields of rows 0..n-1
    prog.push_back(mk_instr(I_RANGE, 0, 0, R_NM1, 0, 0));
    prog.push_back(mk_instr(I_VFILL, R_E, 0, 0, 32, 0));
    prog.push_back(mk_instr(I_VFILL, R_F, 0, 0, 32, 0));
    prog.push_back(mk_instr(I_VFILL, R_RIGHT, 0, 0, 32, 0));
    prog.push_back(mk_instr(I_VFILL, R_MID, 0, 0, 32, 0));
    prog.push_back(mk_instr(I_VFILL, R_LEFT, 0, 0, 32, 0));
    prog.push_back(mk_instr(I_VFILL, R_TMP, 0, 0, 32, 0));
    prog.push_back(mk_instr(I_VFILL, R_SB, 0, 0, 2, 0));
    loop_pc = prog.size();
    // active rows of antidiagonal d
    prog.push_back(mk_instr(I_SUB, R_T, R_D, R_MP1, 0, 0));
    prog.push_back(mk_instr(I_MAX, R_LO, R_T, 0, 0, 0));
    prog.push_back(mk_instr(I_SUB, R_T, R_D, R_TWO, 0, 0));
    prog.push_back(mk_instr(I_MIN, R_HI, R_T, R_NM1, 0, 0));
    prog.push_back(mk_instr(I_SUB, R_LOX, R_LO, R_ONE, 0, 0));
    prog.push_back(mk_instr(I_MAX, R_LOX, R_LOX, 0, 0, 0));
    // line 5: seqB one row down, B[d-1] into row 0
    prog.push_back(mk_instr(I_RANGE, 0, 0, R_NM1, 0, 0));
    prog.push_back(mk_instr(I_VSHIFT, 0, R_SB, 0, 2, 0));
    blt_pc = prog.size();
    prog.push_back(mk_instr(I_BLT, 0, R_D, R_MP2, 0, blt_pc + 2));
    jmp_pc = prog.size();
    prog.push_back(mk_instr(I_JMP, 0, 0, 0, 0, jmp_pc + 3));
    prog.push_back(mk_instr(I_VREAD, R_BV, R_BS, R_T, 2, 0));
    prog.push_back(mk_instr(I_VWRITE, R_BV, R_SB, 0, 2, 0));
    prog.push_back(mk_instr(I_RANGE, 0, R_LOX, R_HI, 0, 0));
    // line 6
    prog.push_back(mk_instr(I_VSHIFT, 0, R_LEFT, 0, 32, 0));
    // line 7: right <= left + match(seqA, seqB)
    prog.push_back(mk_instr(I_VTT, R_TMP, R_SA, R_SB, 2, TT_MATCH));
    prog.push_back(mk_instr(I_VSETF, R_TMP, 0, 0, 32, sc_match));
    prog.push_back(mk_instr(I_VSETF, R_TMP, 1, 0, 32, sc_mis));
    prog.push_back(mk_instr(I_VTT, R_RIGHT, R_LEFT, R_TMP, 32, TT_ADD));
    // line 8: right <= max(right, 0)
    prog.push_back(mk_instr(I_VTTI, R_RIGHT, R_RIGHT, 0, 32, TT_MAXCMP));
    prog.push_back(mk_instr(I_VTTI, R_RIGHT, R_RIGHT, 0, 32, TT_MAXSEL));
    // line 9: left <= mid - Gfirst
    prog.push_back(mk_instr(I_VTTI, R_LEFT, R_MID, R_GF, 32, TT_SUB));
    // line 10: tmp <= F - Gext
    prog.push_back(mk_instr(I_VTTI, R_TMP, R_F, R_GE, 32, TT_SUB));
    // line 11: F <= max(left, tmp)
    prog.push_back(mk_instr(I_VTT, R_F, R_LEFT, R_TMP, 32, TT_MAXCMP));
    prog.push_back(mk_instr(I_VTT, R_F, R_LEFT, R_TMP, 32, TT_MAXSEL));
    // line 12: right <= max(right, F)
    prog.push_back(mk_instr(I_VTT, R_RIGHT, R_RIGHT, R_F, 32, TT_MAXCMP));
    prog.push_back(mk_instr(I_VTT, R_RIGHT, R_RIGHT, R_F, 32, TT_MAXSEL));
    // line 13: tmp <= E - Gext
    prog.push_back(mk_instr(I_VTTI, R_TMP, R_E, R_GE, 32, TT_SUB));
    // line 14: E <= max(left, tmp)
    prog.push_back(mk_instr(I_VTT, R_E, R_LEFT, R_TMP, 32, TT_MAXCMP));
    prog.push_back(mk_instr(I_VTT, R_E, R_LEFT, R_TMP, 32, TT_MAXSEL));
    // line 15: shift E one row down
    prog.push_back(mk_instr(I_VSHIFT, 0, R_E, 0, 32, 0));
    // line 16: right <= max(right, E)
    prog.push_back(mk_instr(I_VTT, R_RIGHT, R_RIGHT, R_E, 32, TT_MAXCMP));
    prog.push_back(mk_instr(I_VTT, R_RIGHT, R_RIGHT, R_E, 32, TT_MAXSEL));
    // line 17: max_score <= max(maxScalar(right), max_score)
    prog.push_back(mk_instr(I_RANGE, 0, R_LO, R_HI, 0, 0));
    prog.push_back(mk_instr(I_VMAXS, R_T, R_RIGHT, 0, 32, 0));
    prog.push_back(mk_instr(I_MAX, R_MAX, R_MAX, R_T, 0, 0));
    // line 4: rotate the antidiagonal buffers
    prog.push_back(mk_instr(I_ADDI, R_T, R_LEFT, 0, 0, 0));
    prog.push_back(mk_instr(I_ADDI, R_LEFT, R_MID, 0, 0, 0));
    prog.push_back(mk_instr(I_ADDI, R_MID, R_RIGHT, 0, 0, 0));
    prog.push_back(mk_instr(I_ADDI, R_RIGHT, R_T, 0, 0, 0));
    prog.push_back(mk_instr(I_ADDI, R_D, R_D, 0, 0, 1));
    prog.push_back(mk_instr(I_BLT, 0, R_D, R_END, 0, loop_pc));
    prog.push_back(mk_instr(I_HALT, 0, 0, 0, 0, 0));
  endfunction

  // Reference: affine-gap Smith-Waterman best score, all borders zero.
  function automatic int sw_ref(int a[], int b[], int sc_match, int sc_mis, int gf, int ge);
    int n = a.size(), m = b.size();
    int H[][], E[][], F[][];
    int best = 0;
    H = new[n+1]; E = new[n+1]; F = new[n+1];
    foreach (H[i]) begin
      H[i] = new[m+1]; E[i] = new[m+1]; F[i] = new[m+1];
      foreach (H[i][j]) begin H[i][j] = 0; E[i][j] = 0; F[i][j] = 0; end
    end
    for (int i = 1; i <= n; i++)
      for (int j = 1; j <= m; j++) begin
        int h;
        E[i][j] = (E[i][j-1] - ge > H[i][j-1] - gf) ? E[i][j-1] - ge : H[i][j-1] - gf;
        F[i][j] = (F[i-1][j] - ge > H[i-1][j] - gf) ? F[i-1][j] - ge : H[i-1][j] - gf;
        h = H[i-1][j-1] + ((a[i-1] == b[j-1]) ? sc_match : sc_mis);
        if (E[i][j] > h) h = E[i][j];
        if (F[i][j] > h) h = F[i][j];
        if (h < 0) h = 0;
        H[i][j] = h;
        if (h > best) best = h;
      end
    return best;
  endfunction

endpackage
