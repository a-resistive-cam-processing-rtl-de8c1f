// tb_recam_crossbar -- random test of one crossbar IC (8 rows, placed as IC
// number 1, so its global rows are 8..15) against a row-array model:
// row tagging, masked parallel write, masked compare inside and outside the
// active range, write-TAG after a TAG shift (one bit of the paper's
// shift-down-one-row operation) and OR read of the tagged rows.
module tb_recam_crossbar;
  import recam_pkg::*;
  localparam int ROWS = 8, BASE = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  recam_cmd_t cmd;
  recam_rsp_t rsp;
  logic global_any = 0, tag_in = 0, tag_out;
  logic [ROW_BITS-1:0] mdl [ROWS];
  logic mtag [ROWS];
  int lo = 0, hi = -1;
  int checks = 0, failures = 0;

  recam_crossbar #(.ROWS(ROWS), .IC_INDEX(1)) dut (.*);

  function automatic logic [ROW_BITS-1:0] rnd();
    logic [ROW_BITS-1:0] v;
    for (int i = 0; i < ROW_BITS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic issue(recam_cmd_t c);
    logic a;
    logic [ROW_BITS-1:0] acc;
    logic nt [ROWS];
    @(negedge clk) cmd = c;
    nt = mtag;
    a = rsp.any;
    acc = rsp.rdata;
    case (c.op)
      CMD_TAG_ROW: begin a = 0; foreach (nt[r]) begin nt[r] = (BASE + r == int'(c.lo)); a |= nt[r]; end end
      CMD_CMP: begin
        a = 0;
        foreach (nt[r]) begin
          nt[r] = (((mdl[r] ^ c.key) & c.mask) == '0) && (c.cmp_all || (BASE + r >= lo && BASE + r <= hi));
          a |= nt[r];
        end
      end
      CMD_WRITE: foreach (mdl[r]) if (mtag[r]) mdl[r] = (mdl[r] & ~c.mask) | (c.key & c.mask);
      CMD_WRITE_TAG: foreach (mdl[r]) if (BASE + r >= lo && BASE + r <= hi)
                       mdl[r] = (mdl[r] & ~c.mask) | ({ROW_BITS{mtag[r]}} & c.mask);
      CMD_SHIFT: begin nt[0] = tag_in; for (int r = 1; r < ROWS; r++) nt[r] = mtag[r-1]; end
      CMD_READ: begin acc = '0; foreach (mdl[r]) if (mtag[r]) acc |= mdl[r] & c.mask; end
      CMD_SET_RANGE: begin lo = int'(c.lo); hi = int'(c.hi); end
      default: ;
    endcase
    @(posedge clk) #1;
    mtag = nt;
    checks++;
    if (rsp.any !== a) begin failures++; $display("FAIL any after %s", c.op.name()); end
    if (c.op == CMD_READ) begin
      checks++;
      if (rsp.rdata !== acc) begin failures++; $display("FAIL read"); end
    end
  endtask

  initial begin
    recam_cmd_t c;
    cmd = '0;
    foreach (mtag[r]) mtag[r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // load every row
    for (int r = 0; r < ROWS; r++) begin
      mdl[r] = rnd();
      c = '0; c.op = CMD_TAG_ROW; c.lo = ROW_AW'(BASE + r); issue(c);
      c = '0; c.op = CMD_WRITE; c.key = mdl[r]; c.mask = '1; issue(c);
      c = '0; c.op = CMD_READ; c.mask = '1; issue(c);
    end
    for (int i = 0; i < 600; i++) begin
      c = '0;
      c.op = cmd_op_e'($urandom_range(1, 9));
      if (c.op == CMD_CMP_TEST || c.op == CMD_CMP_CAND) c.op = CMD_CMP;
      c.cmp_all = $urandom_range(0, 1);
      c.key = rnd();
      c.mask = '0;
      repeat ($urandom_range(0, 3)) c.mask[$urandom_range(0, ROW_BITS-1)] = 1'b1;
      if (c.op == CMD_READ || c.op == CMD_WRITE) c.mask = rnd();
      c.lo = ROW_AW'($urandom_range(4, 17));
      c.hi = ROW_AW'($urandom_range(6, 20));
      tag_in = $urandom_range(0, 1);
      issue(c);
    end
    // contents at the end
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (dut.mem[r] !== mdl[r]) begin failures++; $display("FAIL row %0d contents", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
