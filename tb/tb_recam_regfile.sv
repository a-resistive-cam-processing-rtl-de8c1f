// tb_recam_regfile -- random writes and reads on all three read ports;
// register 0 must always read zero.
module tb_recam_regfile;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] ra_addr = 0, rb_addr = 0, rc_addr = 0, wr_addr = 0;
  logic [31:0] ra_data, rb_data, rc_data, wr_data = 0, mdl [32];
  logic wr_en = 0;
  int checks = 0, failures = 0;
  recam_regfile dut (.*);
  initial begin
    foreach (mdl[i]) mdl[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      wr_en = $urandom_range(0, 1); wr_addr = 5'($urandom); wr_data = $urandom;
      ra_addr = 5'($urandom); rb_addr = 5'($urandom); rc_addr = 5'($urandom);
      #1;
      checks += 3;
      if (ra_data !== mdl[ra_addr]) begin failures++; $display("FAIL a"); end
      if (rb_data !== mdl[rb_addr]) begin failures++; $display("FAIL b"); end
      if (rc_data !== mdl[rc_addr]) begin failures++; $display("FAIL c"); end
      @(posedge clk);
      if (wr_en && wr_addr != 0) mdl[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
