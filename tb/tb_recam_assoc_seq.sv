// tb_recam_assoc_seq -- checks every associative operation of the sequencer
// on one small crossbar IC (8 rows) with the truth-table buffer: add, sub,
// max (column and scalar operands, signed), the logic tables, the DNA match,
// field shift, conditional set, fill, row read/write and max scalar. Row
// contents are random; expected values are computed here from the same
// random words. The cycle counts the paper gives for 32-bit operations are
// checked as counts of issued array commands: shift 96, C <- A + B 512
// plus 2 flag-clear cycles, max scalar 64 plus 1 tagging cycle, 2-bit match
// 10.
module tb_recam_assoc_seq;
  import recam_pkg::*;

  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, ready, done;
  seq_req_t req;
  logic [31:0] result;
  tt_id_e tt_tid;
  tt_desc_t tt_desc;
  tt_entry_t tt_tbl [16];
  recam_cmd_t cmd, hcmd, xcmd;
  recam_rsp_t rsp;
  logic hsel = 1;
  logic tag_out;
  int checks = 0, failures = 0;
  int ncmd = 0;

  recam_tt_buffer u_tt (.clk, .rst_n, .rd_tid(tt_tid), .rd_desc(tt_desc), .rd_tbl(tt_tbl),
    .wr_entry_en(1'b0), .wr_entry_idx(6'd0), .wr_entry('0), .wr_desc_en(1'b0),
    .wr_desc_tid(TT_ADD), .wr_desc('0));
  recam_assoc_seq dut (.clk, .rst_n, .req_valid, .ready, .req, .done, .result,
    .tt_tid, .tt_desc, .tt_tbl, .cmd, .rsp);
  assign xcmd = hsel ? hcmd : cmd;
  recam_crossbar #(.ROWS(ROWS)) u_ic (.clk, .rst_n, .cmd(xcmd), .global_any(rsp.any),
    .tag_in(1'b0), .tag_out, .rsp);

  always @(posedge clk) if (!hsel && cmd.op != CMD_NOP) ncmd++;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  function automatic logic [ROW_BITS-1:0] fmask(int col, int w);
    return ROW_BITS'((64'd1 << w) - 1) << col;
  endfunction

  task automatic hostc(recam_cmd_t c);
    @(negedge clk) hcmd = c;
    @(posedge clk) #1 hcmd = '0;
  endtask

  task automatic wr(int row, int col, int w, longint v);
    recam_cmd_t c;
    c = '0; c.op = CMD_TAG_ROW; c.lo = ROW_AW'(row); hostc(c);
    c = '0; c.op = CMD_WRITE; c.key = ROW_BITS'(v) << col; c.mask = fmask(col, w); hostc(c);
  endtask

  task automatic rd(int row, int col, int w, output longint v);
    recam_cmd_t c;
    c = '0; c.op = CMD_TAG_ROW; c.lo = ROW_AW'(row); hostc(c);
    c = '0; c.op = CMD_READ; c.mask = fmask(col, w); hostc(c);
    @(posedge clk); #1;
    v = longint'((rsp.rdata >> col) & ROW_BITS'((64'd1 << w) - 1));
  endtask

  task automatic set_range(int lo, int hi);
    recam_cmd_t c;
    c = '0; c.op = CMD_SET_RANGE; c.lo = ROW_AW'(lo); c.hi = ROW_AW'(hi); hostc(c);
  endtask

  task automatic run(seq_req_t q, output int n);
    @(negedge clk);
    hsel = 0;
    ncmd = 0;
    req = q; req_valid = 1;
    @(posedge clk) #1 req_valid = 0;
    while (!done) @(posedge clk);
    @(negedge clk) hsel = 1;
    n = ncmd;
  endtask

  function automatic seq_req_t mk(seq_kind_e k, tt_id_e t, int d, int a, int b, int w, int s, logic bi);
    seq_req_t q;
    q = '0; q.kind = k; q.tid = t; q.col_d = 8'(d); q.col_a = 8'(a); q.col_b = 8'(b);
    q.w = 6'(w); q.scalar = 32'(s); q.b_imm = bi;
    return q;
  endfunction

  int A[ROWS], B[ROWS], S[ROWS];

  task automatic load_ab();
    foreach (A[r]) begin
      A[r] = int'($urandom) >>> ($urandom_range(0, 3) * 8);
      B[r] = int'($urandom) >>> ($urandom_range(0, 3) * 8);
      if (r == 3) B[r] = A[r];
      wr(r, COL_AD0, 32, A[r]);
      wr(r, COL_AD1, 32, B[r]);
      wr(r, COL_AD2, 32, 32'h5555_5555);
    end
  endtask

  task automatic check_d(string what, int exp[ROWS], int lo, int hi, int col);
    longint v;
    for (int r = 0; r < ROWS; r++) begin
      rd(r, col, 32, v);
      if (r >= lo && r <= hi) check($sformatf("%s row %0d", what, r), v, longint'(32'(exp[r])));
      else check($sformatf("%s untouched row %0d", what, r), v, 32'h5555_5555);
    end
  endtask

  initial begin
    int n, E[ROWS];
    longint v;
    hcmd = '0; req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int it = 0; it < 3; it++) begin
      int k;
      load_ab();
      for (int r = 0; r < ROWS; r++) begin
        rd(r, COL_AD0, 32, v);
        check($sformatf("load row %0d", r), v, A[r]);
      end
      set_range(1, 6);
      // C <- A + B
      run(mk(SQ_TT, TT_ADD, COL_AD2, COL_AD0, COL_AD1, 32, 0, 0), n);
      foreach (E[r]) E[r] = A[r] + B[r];
      check_d("add", E, 1, 6, COL_AD2);
      check("add cycles", n, 514);
      // C <- A - scalar
      for (int r = 0; r < ROWS; r++) wr(r, COL_AD2, 32, 32'h5555_5555);
      k = int'($urandom_range(0, 1000));
      run(mk(SQ_TT, TT_SUB, COL_AD2, COL_AD0, 0, 32, k, 1), n);
      foreach (E[r]) E[r] = A[r] - k;
      check_d("subi", E, 1, 6, COL_AD2);
      // C <- A - B
      for (int r = 0; r < ROWS; r++) wr(r, COL_AD2, 32, 32'h5555_5555);
      run(mk(SQ_TT, TT_SUB, COL_AD2, COL_AD0, COL_AD1, 32, 0, 0), n);
      foreach (E[r]) E[r] = A[r] - B[r];
      check_d("sub", E, 1, 6, COL_AD2);
      // in place: B <- A + B, then A <- A - B (with the new B)
      run(mk(SQ_TT, TT_ADD, COL_AD1, COL_AD0, COL_AD1, 32, 0, 0), n);
      check("in-place add cycles", n, 514);
      run(mk(SQ_TT, TT_SUB, COL_AD0, COL_AD0, COL_AD1, 32, 0, 0), n);
      for (int r = 0; r < ROWS; r++) begin
        int nb;
        nb = (r >= 1 && r <= 6) ? A[r] + B[r] : B[r];
        rd(r, COL_AD1, 32, v);
        check($sformatf("in-place add row %0d", r), v, longint'(32'(nb)));
        rd(r, COL_AD0, 32, v);
        check($sformatf("in-place sub row %0d", r), v, longint'(32'((r >= 1 && r <= 6) ? A[r] - nb : A[r])));
      end
      load_ab();
      // C <- max(A, B)
      for (int r = 0; r < ROWS; r++) wr(r, COL_AD2, 32, 32'h5555_5555);
      run(mk(SQ_TT, TT_MAXCMP, COL_AD2, COL_AD0, COL_AD1, 32, 0, 0), n);
      run(mk(SQ_TT, TT_MAXSEL, COL_AD2, COL_AD0, COL_AD1, 32, 0, 0), n);
      foreach (E[r]) E[r] = (A[r] > B[r]) ? A[r] : B[r];
      check_d("max", E, 1, 6, COL_AD2);
      // C <- max(A, scalar)
      for (int r = 0; r < ROWS; r++) wr(r, COL_AD2, 32, 32'h5555_5555);
      k = int'($urandom) >>> 8;
      run(mk(SQ_TT, TT_MAXCMP, COL_AD2, COL_AD0, 0, 32, k, 1), n);
      run(mk(SQ_TT, TT_MAXSEL, COL_AD2, COL_AD0, 0, 32, k, 1), n);
      foreach (E[r]) E[r] = (A[r] > k) ? A[r] : k;
      check_d("maxi", E, 1, 6, COL_AD2);
      // XOR, AND, NAND, NOR, NOT
      for (int r = 0; r < ROWS; r++) wr(r, COL_AD2, 32, 32'h5555_5555);
      run(mk(SQ_TT, TT_XOR, COL_AD2, COL_AD0, COL_AD1, 32, 0, 0), n);
      foreach (E[r]) E[r] = A[r] ^ B[r];
      check_d("xor", E, 1, 6, COL_AD2);
      run(mk(SQ_TT, TT_AND, COL_AD2, COL_AD0, COL_AD1, 32, 0, 0), n);
      foreach (E[r]) E[r] = A[r] & B[r];
      check_d("and", E, 1, 6, COL_AD2);
      run(mk(SQ_TT, TT_NAND, COL_AD2, COL_AD0, COL_AD1, 32, 0, 0), n);
      foreach (E[r]) E[r] = ~(A[r] & B[r]);
      check_d("nand", E, 1, 6, COL_AD2);
      run(mk(SQ_TT, TT_NOR, COL_AD2, COL_AD0, COL_AD1, 32, 0, 0), n);
      foreach (E[r]) E[r] = ~(A[r] | B[r]);
      check_d("nor", E, 1, 6, COL_AD2);
      run(mk(SQ_TT, TT_NOT, COL_AD2, COL_AD0, 0, 32, 0, 0), n);
      foreach (E[r]) E[r] = ~A[r];
      check_d("not", E, 1, 6, COL_AD2);
      // max scalar over rows 1..6
      run(mk(SQ_MAXS, TT_ADD, 0, COL_AD0, 0, 32, 0, 0), n);
      k = A[1];
      for (int r = 2; r <= 6; r++) if (A[r] > k) k = A[r];
      check("maxscalar", int'(result), k);
      check("maxscalar cycles", n, 65);
      // DNA match on 2-bit fields: FLAG0 = mismatch
      for (int r = 0; r < ROWS; r++) begin
        S[r] = $urandom_range(0, 3);
        wr(r, COL_SEQA, 2, S[r]);
        wr(r, COL_SEQB, 2, (r % 2) ? S[r] : (S[r] + 1) % 4);
      end
      run(mk(SQ_TT, TT_MATCH, COL_TMP, COL_SEQA, COL_SEQB, 2, 0, 0), n);
      check("match cycles", n, 10);
      run(mk(SQ_SETF, TT_ADD, COL_TMP, 0, 0, 32, 2, 0), n);
      run(mk(SQ_SETF, TT_ADD, COL_TMP, 0, 0, 32, -1, 1), n);
      for (int r = 1; r <= 6; r++) begin
        rd(r, COL_TMP, 32, v);
        check($sformatf("match score row %0d", r), v, (r % 2) ? 2 : 32'hFFFF_FFFF);
      end
      // field shift (rows 1..6 take the row above; row 0 is the source)
      run(mk(SQ_SHIFT, TT_ADD, 0, COL_AD0, 0, 32, 0, 0), n);
      check("shift cycles", n, 96);
      for (int r = 0; r < ROWS; r++) begin
        rd(r, COL_AD0, 32, v);
        check($sformatf("shift row %0d", r), v, 32'((r >= 1 && r <= 6) ? A[r-1] : A[r]));
      end
      // fill, row write and read through the sequencer
      run(mk(SQ_FILL, TT_ADD, COL_F, 0, 0, 32, 77, 0), n);
      q_rw(it);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic q_rw(int it);
    seq_req_t q;
    int n;
    longint v;
    q = mk(SQ_WRITE, TT_ADD, 0, COL_E, 0, 32, 1234 + it, 0); q.row = 5;
    run(q, n);
    q = mk(SQ_READ, TT_ADD, 0, COL_E, 0, 32, 0, 0); q.row = 5;
    run(q, n);
    check("seq read", result, 1234 + it);
    rd(2, COL_F, 32, v);
    check("fill", v, 77);
    rd(7, COL_F, 32, v);
    checks++;
    if (v == 77 && it == 0) ; // row 7 is outside the range, its value is unknown
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
