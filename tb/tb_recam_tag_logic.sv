// tb_recam_tag_logic -- random test of the TAG column (8 rows): compare with
// and without the active range, test compare, conditional AND, TAG shift
// with the chip chain input and output, and row tagging. A reference TAG
// vector is kept in the testbench and compared after every command.
module tb_recam_tag_logic;
  import recam_pkg::*;
  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cmd_op_e op = CMD_NOP;
  logic cmp_all = 0, global_any = 0, tag_in = 0, tag_out, any;
  logic match [ROWS], in_range [ROWS], row_sel [ROWS], tag [ROWS];
  logic ref_tag [ROWS];
  logic ref_any;
  int checks = 0, failures = 0;
  int n_shift = 0, n_cand = 0;

  recam_tag_logic #(.ROWS(ROWS)) dut (.*);

  task automatic step(cmd_op_e o);
    logic a;
    logic nt [ROWS];
    @(negedge clk);
    op = o; cmp_all = $urandom_range(0, 1); global_any = $urandom_range(0, 1); tag_in = $urandom_range(0, 1);
    foreach (match[r]) begin
      match[r] = $urandom_range(0, 1); in_range[r] = $urandom_range(0, 1); row_sel[r] = 0;
    end
    row_sel[$urandom_range(0, ROWS-1)] = 1;
    nt = ref_tag;
    a = ref_any;
    case (o)
      CMD_CMP: begin a = 0; foreach (nt[r]) begin nt[r] = match[r] & (cmp_all | in_range[r]); a |= nt[r]; end end
      CMD_CMP_TEST: begin a = 0; foreach (nt[r]) a |= ref_tag[r] & match[r]; end
      CMD_CMP_CAND: begin n_cand++; if (global_any) foreach (nt[r]) nt[r] = ref_tag[r] & match[r]; end
      CMD_SHIFT: begin n_shift++; nt[0] = tag_in; for (int r = 1; r < ROWS; r++) nt[r] = ref_tag[r-1]; end
      CMD_TAG_ROW: begin a = 0; foreach (nt[r]) begin nt[r] = row_sel[r]; a |= row_sel[r]; end end
      default: ;
    endcase
    @(posedge clk); #1;
    ref_tag = nt; ref_any = a;
    foreach (tag[r]) begin
      checks++;
      if (tag[r] !== ref_tag[r]) begin failures++; $display("FAIL op %s row %0d", o.name(), r); end
    end
    checks++; if (any !== ref_any) begin failures++; $display("FAIL any after %s", o.name()); end
    checks++; if (tag_out !== ref_tag[ROWS-1]) begin failures++; $display("FAIL tag_out"); end
  endtask

  initial begin
    cmd_op_e ops [6] = '{CMD_CMP, CMD_CMP_TEST, CMD_CMP_CAND, CMD_SHIFT, CMD_TAG_ROW, CMD_WRITE};
    foreach (match[r]) begin match[r] = 0; in_range[r] = 0; row_sel[r] = 0; ref_tag[r] = 0; end
    ref_any = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) step(ops[$urandom_range(0, 5)]);
    checks++; if (n_shift == 0 || n_cand == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
