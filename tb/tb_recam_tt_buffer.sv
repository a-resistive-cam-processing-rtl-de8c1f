// tb_recam_tt_buffer -- checks the tables loaded at reset by evaluating
// them: for every input combination of Add and Sub the entry with matching
// inputs must give the full-adder/full-subtractor outputs; each logic table
// must give its function; Max must set A>B / A<B only from the undecided
// state; the match table must flag differing bits. Then checks that the
// user region can be rewritten and the built-in region cannot.
module tb_recam_tt_buffer;
  import recam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  tt_id_e rd_tid = TT_ADD;
  tt_desc_t rd_desc;
  tt_entry_t rd_tbl [16];
  logic wr_entry_en = 0, wr_desc_en = 0;
  logic [5:0] wr_entry_idx = 0;
  tt_entry_t wr_entry = '0;
  tt_id_e wr_desc_tid = TT_ADD;
  tt_desc_t wr_desc = '0;
  int checks = 0, failures = 0;

  recam_tt_buffer dut (.*);

  task automatic check(string what, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // entry of the table whose care bits match inputs s (slot values)
  function automatic int find(logic [3:0] s);
    for (int i = 0; i < int'(rd_desc.count); i++)
      if (((rd_tbl[i].cmp_val ^ s) & rd_tbl[i].cmp_care) == 0) return i;
    return -1;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // Add and Sub
    for (int t = 0; t < 2; t++) begin
      rd_tid = t == 0 ? TT_ADD : TT_SUB; #1;
      check("count 8", rd_desc.count == 8 && rd_desc.clear_flags && !rd_desc.msb_first);
      for (int v = 0; v < 8; v++) begin
        logic a, b, c; int i;
        {a, b, c} = 3'(v);
        i = find({1'b0, c, b, a});
        check($sformatf("%s row %0d present", rd_tid.name(), v), i >= 0);
        if (i >= 0) begin
          check($sformatf("%s row %0d D", rd_tid.name(), v), rd_tbl[i].wr_val[0] == (a ^ b ^ c));
          if (t == 0) check($sformatf("add row %0d carry", v), rd_tbl[i].wr_val[1] == ((a & b) | (a & c) | (b & c)));
          else        check($sformatf("sub row %0d borrow", v), rd_tbl[i].wr_val[1] == ((~a & b) | (~a & c) | (b & c)));
        end
      end
    end
    // logic tables
    for (int t = 0; t < 4; t++) begin
      tt_id_e ids [4] = '{TT_XOR, TT_AND, TT_NAND, TT_NOR};
      rd_tid = ids[t]; #1;
      check("count 4", rd_desc.count == 4);
      for (int v = 0; v < 4; v++) begin
        logic a, b, d; int i;
        {a, b} = 2'(v);
        d = t == 0 ? a ^ b : t == 1 ? a & b : t == 2 ? ~(a & b) : ~(a | b);
        i = find({2'b00, b, a});
        check($sformatf("%s %0d", rd_tid.name(), v), i >= 0 && rd_tbl[i].wr_val[0] == d && rd_tbl[i].wr_en[0]);
      end
    end
    rd_tid = TT_NOT; #1;
    check("not", rd_desc.count == 2 && rd_tbl[find(4'b0000)].wr_val[0] == 1 && rd_tbl[find(4'b0001)].wr_val[0] == 0);
    rd_tid = TT_MAXCMP; #1;
    check("max msb first signed", rd_desc.msb_first && rd_desc.signed_msb && rd_desc.count == 4);
    check("max a>b", rd_tbl[find(4'b0001)].wr_en == 3'b010 && rd_tbl[find(4'b0001)].wr_val[1]);
    check("max a<b", rd_tbl[find(4'b0010)].wr_en == 3'b100 && rd_tbl[find(4'b0010)].wr_val[2]);
    check("max decided", find(4'b0101) < 0);
    rd_tid = TT_MATCH; #1;
    check("match", rd_desc.count == 2 && find(4'b0001) >= 0 && find(4'b0010) >= 0 && find(4'b0011) < 0 && find(4'b0000) < 0);
    // user writes
    @(negedge clk);
    wr_entry_en = 1; wr_entry_idx = 6'd50; wr_entry = '{cmp_val: 4'h3, cmp_care: 4'h3, wr_val: 3'h1, wr_en: 3'h1};
    wr_desc_en = 1; wr_desc_tid = tt_id_e'(10); wr_desc = '{first: 6'd50, count: 4'd1, msb_first: 1'b0, signed_msb: 1'b0, clear_flags: 1'b0};
    @(negedge clk);
    wr_entry_idx = 6'd0; wr_desc_tid = TT_ADD;
    @(negedge clk);
    wr_entry_en = 0; wr_desc_en = 0;
    rd_tid = tt_id_e'(10); #1;
    check("user table", rd_desc.first == 50 && rd_desc.count == 1 && rd_tbl[0].cmp_val == 4'h3);
    rd_tid = TT_ADD; #1;
    check("built-in protected", rd_desc.count == 8 && rd_desc.first == 0 && rd_tbl[0].cmp_care == 4'b0111);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
