// tb_recam_prins_top -- end-to-end test of the ReCAM system: the host loads
// the Smith-Waterman program and two DNA sequences, the microcontroller
// runs the antidiagonal loop on the ICs, and the best local alignment score
// is compared with a software model of the same recurrence. Runs at a
// reduced size (4 ICs of 4 rows) so that TAG shifts cross IC boundaries and
// all three sections of the matrix (growing, constant and shrinking active
// rows) occur. Counts how often each mechanism happened.
module tb_recam_prins_top;
  import recam_pkg::*;
  import sw_prog_pkg::*;

  localparam int NIC = 4, ROWS = 4, IMEM = 256;
  localparam int SC_MATCH = 2, SC_MIS = -1, GF = 3, GE = 1;

  logic clk = 0, rst_n = 0, start = 0, halted;
  logic imem_we = 0;
  logic [$clog2(IMEM)-1:0] imem_waddr = '0;
  instr_t imem_wdata = '0;
  recam_cmd_t host_cmd = '0, cmd_mon;
  recam_rsp_t host_rsp;
  logic [4:0] host_reg_addr = '0;
  logic [31:0] host_reg_data, instr_count;
  logic chain_out;
  int checks = 0, failures = 0;
  longint cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  recam_prins_top #(.NIC(NIC), .ROWS(ROWS), .IMEM_DEPTH(IMEM)) dut (
    .clk, .rst_n, .start, .halted,
    .imem_we, .imem_waddr, .imem_wdata,
    .tt_entry_we(1'b0), .tt_entry_idx(6'd0), .tt_entry_wdata('0),
    .tt_desc_we(1'b0), .tt_desc_tid(TT_ADD), .tt_desc_wdata('0),
    .host_cmd, .host_rsp, .host_reg_addr, .host_reg_data, .instr_count,
    .cmd_mon, .chain_in(1'b0), .chain_out
  );

  // ------------------------------------------------ mechanism counters
  int n_chain_cross = 0, n_cand_taken = 0, n_cand_skipped = 0;
  int n_grow = 0, n_const = 0, n_shrink = 0, n_binsert = 0, n_maxs = 0;
  int prev_lo = -1, prev_hi = -1;
  always @(posedge clk) if (rst_n) begin
    if (cmd_mon.op == CMD_SHIFT && (dut.g_ic[0].u_ic.tag_out || dut.g_ic[1].u_ic.tag_out ||
                                    dut.g_ic[2].u_ic.tag_out)) n_chain_cross++;
    if (cmd_mon.op == CMD_CMP_CAND) begin
      if (host_rsp.any) n_cand_taken++; else n_cand_skipped++;
    end
    if (cmd_mon.op == CMD_TAG_ROW && !halted) n_binsert++;
    if (cmd_mon.op == CMD_CMP_TEST && !halted) n_maxs++;
  end
  // classify active-row ranges used by max scalar (exact active rows)
  always @(posedge clk) if (rst_n && !halted && cmd_mon.op == CMD_SET_RANGE &&
                            dut.u_mcu.ir.op == I_RANGE && dut.u_mcu.ir.ra == R_LO) begin
    int lo, hi, len, plen;
    lo = int'(cmd_mon.lo); hi = int'(cmd_mon.hi); len = hi - lo + 1; plen = prev_hi - prev_lo + 1;
    if (prev_lo >= 0) begin
      if (len > plen) n_grow++; else if (len == plen) n_const++; else n_shrink++;
    end
    prev_lo = lo; prev_hi = hi;
  end

  task automatic host(recam_cmd_t c);
    @(negedge clk) host_cmd = c;
    @(posedge clk) #1 host_cmd = '0;
  endtask

  task automatic write_row_field(int row, int col, int w, int val);
    recam_cmd_t c;
    c = '0; c.op = CMD_TAG_ROW; c.lo = ROW_AW'(row); host(c);
    c = '0; c.op = CMD_WRITE;
    c.key  = ROW_BITS'(val) << col;
    c.mask = ROW_BITS'((64'd1 << w) - 1) << col;
    host(c);
  endtask

  task automatic run_case(int a[], int b[]);
    instr_t prog[$];
    int exp, got;
    longint t0;
    build_program(a.size(), b.size(), SC_MATCH, SC_MIS, GF, GE, prog);
    foreach (prog[i]) begin
      @(negedge clk);
      imem_we = 1; imem_waddr = 8'(i); imem_wdata = prog[i];
    end
    @(negedge clk) imem_we = 0;
    foreach (a[i]) write_row_field(i, COL_SEQA, 2, a[i]);
    foreach (b[j]) write_row_field(j, COL_BSTO, 2, b[j]);
    prev_lo = -1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    t0 = cycles;
    @(posedge clk);
    wait (halted);
    @(posedge clk);
    @(negedge clk) host_reg_addr = 5'(R_MAX);
    #1;
    got = int'(host_reg_data);
    exp = sw_ref(a, b, SC_MATCH, SC_MIS, GF, GE);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL n=%0d m=%0d score %0d expected %0d", a.size(), b.size(), got, exp);
    end else
      $display("ok   n=%0d m=%0d score %0d (%0d cycles, %0d instructions)", a.size(), b.size(), got,
               cycles - t0, instr_count);
  endtask

  initial begin
    int a[], b[];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // case 1: n > m, with a planted common substring
    a = '{0,1,2,3,3,2,1,0,2,2,1,3};
    b = '{3,1,2,3,3,2,0,1};
    run_case(a, b);
    // case 2: n < m, random
    a = new[5]; b = new[9];
    foreach (a[i]) a[i] = $urandom_range(0, 3);
    foreach (b[i]) b[i] = $urandom_range(0, 3);
    run_case(a, b);
    // case 3: equal lengths, random
    a = new[7]; b = new[7];
    foreach (a[i]) a[i] = $urandom_range(0, 3);
    foreach (b[i]) b[i] = $urandom_range(0, 3);
    run_case(a, b);
    $display("mechanisms: chain_cross=%0d cand_taken=%0d cand_skipped=%0d grow=%0d const=%0d shrink=%0d row_access=%0d maxs_bits=%0d",
             n_chain_cross, n_cand_taken, n_cand_skipped, n_grow, n_const, n_shrink, n_binsert, n_maxs);
    checks++; if (n_chain_cross == 0) begin failures++; $display("FAIL no IC-crossing shift"); end
    checks++; if (n_cand_taken == 0) begin failures++; $display("FAIL no conditional AND taken"); end
    checks++; if (n_cand_skipped == 0) begin failures++; $display("FAIL no conditional AND skipped"); end
    checks++; if (n_grow == 0) begin failures++; $display("FAIL no growing section"); end
    checks++; if (n_const == 0) begin failures++; $display("FAIL no constant section"); end
    checks++; if (n_shrink == 0) begin failures++; $display("FAIL no shrinking section"); end
    checks++; if (n_binsert == 0) begin failures++; $display("FAIL no B insertion"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
