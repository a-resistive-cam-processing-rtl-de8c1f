// tb_recam_mcu -- the microcontroller driving one 8-row crossbar IC. A short
// program exercises every instruction class: immediates and ALU operations,
// a counted BLT loop, JMP, RANGE, VFILL, VWRITE, VTTI (add of a scalar),
// VTT (sub of two fields), VSHIFT, VMAXS and VREAD. The registers are read
// back through the host port once the program halts, rows are read with host
// commands, and the retired-instruction count is checked.
module tb_recam_mcu;
  import recam_pkg::*;
  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, halted;
  logic imem_we = 0;
  logic [7:0] imem_waddr = 0;
  instr_t imem_wdata = '0;
  recam_cmd_t host_cmd = '0, cmd;
  recam_rsp_t rsp;
  logic [4:0] host_reg_addr = 0;
  logic [31:0] host_reg_data, instr_count;
  logic tag_out;
  int checks = 0, failures = 0;

  recam_mcu #(.IMEM_DEPTH(256)) dut (
    .clk, .rst_n, .start, .halted, .imem_we, .imem_waddr, .imem_wdata,
    .tt_entry_we(1'b0), .tt_entry_idx(6'd0), .tt_entry_wdata('0),
    .tt_desc_we(1'b0), .tt_desc_tid(TT_ADD), .tt_desc_wdata('0),
    .host_cmd, .host_reg_addr, .host_reg_data, .instr_count, .cmd, .rsp);

  recam_crossbar #(.ROWS(ROWS), .IC_INDEX(0)) u_ic (
    .clk, .rst_n, .cmd, .global_any(rsp.any), .tag_in(1'b0), .tag_out, .rsp);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  task automatic hcmd(recam_cmd_t c);
    @(negedge clk) host_cmd = c;
    @(posedge clk) #1 host_cmd = '0;
  endtask

  function automatic logic [31:0] read_row(int r, int col);
    return u_ic.mem[r][col +: 32];
  endfunction

  initial begin
    instr_t p[$];
    int n_instr, cycles;
    // r1..r8 scalar, r10 row field columns
    p.push_back(mk_instr(I_LI,   1, 0, 0, 0, 5));
    p.push_back(mk_instr(I_LI,   2, 0, 0, 0, -7));
    p.push_back(mk_instr(I_ADD,  3, 1, 2, 0, 0));          // -2
    p.push_back(mk_instr(I_SUB,  4, 1, 2, 0, 0));          // 12
    p.push_back(mk_instr(I_MAX,  5, 1, 2, 0, 0));          // 5
    p.push_back(mk_instr(I_MIN,  6, 1, 2, 0, 0));          // -7
    p.push_back(mk_instr(I_LI,   7, 0, 0, 0, 0));
    p.push_back(mk_instr(I_LI,   8, 0, 0, 0, 10));
    p.push_back(mk_instr(I_ADDI, 7, 7, 0, 0, 1));          // pc 8: loop
    p.push_back(mk_instr(I_BLT,  0, 7, 8, 0, 8));
    p.push_back(mk_instr(I_JMP,  0, 0, 0, 0, 12));
    p.push_back(mk_instr(I_LI,   9, 0, 0, 0, 99));         // skipped
    p.push_back(mk_instr(I_LI,  10, 0, 0, 0, COL_E));      // pc 12
    p.push_back(mk_instr(I_LI,  11, 0, 0, 0, COL_F));
    p.push_back(mk_instr(I_LI,  12, 0, 0, 0, ROWS - 1));
    p.push_back(mk_instr(I_LI,  13, 0, 0, 0, 3));
    p.push_back(mk_instr(I_LI,  14, 0, 0, 0, 32'h99));
    p.push_back(mk_instr(I_LI,  15, 0, 0, 0, COL_TMP));
    p.push_back(mk_instr(I_RANGE, 0, 0, 12, 0, 0));        // rows 0..7
    p.push_back(mk_instr(I_VFILL, 10, 0, 0, 32, 32'h10));  // E = 0x10
    p.push_back(mk_instr(I_VWRITE, 14, 10, 13, 32, 0));    // E[3] = 0x99
    p.push_back(mk_instr(I_VTTI, 11, 10, 1, 32, TT_ADD));  // F = E + 5
    p.push_back(mk_instr(I_VTT,  15, 11, 10, 32, TT_SUB)); // TMP = F - E = 5
    p.push_back(mk_instr(I_VSHIFT, 0, 10, 0, 32, 0));      // E one row down
    p.push_back(mk_instr(I_VMAXS, 16, 11, 0, 32, 0));      // max F = 0x9E
    p.push_back(mk_instr(I_VREAD, 17, 11, 13, 32, 0));     // F[3]
    p.push_back(mk_instr(I_LI,  18, 0, 0, 0, 2));
    p.push_back(mk_instr(I_VREAD, 19, 10, 18, 32, 0));     // E[2] after shift
    p.push_back(mk_instr(I_HALT, 0, 0, 0, 0, 0));
    n_instr = p.size() - 1 + 2 * 9;                        // loop body runs 10 times
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    foreach (p[i]) begin
      @(negedge clk) imem_we = 1; imem_waddr = 8'(i); imem_wdata = p[i];
    end
    @(negedge clk) imem_we = 0;
    // rows must be readable by the host before the program
    begin
      recam_cmd_t c;
      for (int r = 0; r < ROWS; r++) begin
        c = '0; c.op = CMD_TAG_ROW; c.lo = ROW_AW'(r); hcmd(c);
        c = '0; c.op = CMD_WRITE; c.mask = '1; c.key = '0; hcmd(c);
      end
    end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 0;
    while (!halted) begin @(posedge clk); cycles++; end
    #1;
    check("instr_count", instr_count, 32'(n_instr));
    begin
      logic [31:0] exp [20];
      exp[1] = 5; exp[2] = -7; exp[3] = -2; exp[4] = 12; exp[5] = 5; exp[6] = -7;
      exp[7] = 10; exp[9] = 0; exp[16] = 32'h9E; exp[17] = 32'h9E; exp[19] = 32'h10;
      foreach (exp[i]) if (i inside {1, 2, 3, 4, 5, 6, 7, 9, 16, 17, 19}) begin
        @(negedge clk) host_reg_addr = 5'(i);
        #1 check($sformatf("r%0d", i), host_reg_data, exp[i]);
      end
    end
    for (int r = 0; r < ROWS; r++) begin
      check($sformatf("F[%0d]", r), read_row(r, COL_F), r == 3 ? 32'h9E : 32'h15);
      check($sformatf("TMP[%0d]", r), read_row(r, COL_TMP), 32'd5);
      check($sformatf("E[%0d] shifted", r), read_row(r, COL_E), r == 0 ? 32'h0 : r == 4 ? 32'h99 : 32'h10);
    end
    // host read of a row through the array bus
    begin
      recam_cmd_t c;
      c = '0; c.op = CMD_TAG_ROW; c.lo = ROW_AW'(3); hcmd(c);
      c = '0; c.op = CMD_READ; c.mask = '1; hcmd(c);
      check("host read F[3]", rsp.rdata[COL_F +: 32], 32'h9E);
    end
    $display("program took %0d cycles", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
