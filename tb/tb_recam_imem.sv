// tb_recam_imem -- writes random instruction words and reads them back with
// the one-cycle read latency.
module tb_recam_imem;
  import recam_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [7:0] rd_addr = 0, wr_addr = 0;
  instr_t rd_data, wr_data = '0, mdl [256];
  logic wr_en = 0;
  int checks = 0, failures = 0;
  recam_imem #(.DEPTH(256)) dut (.*);
  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 8'(i); wr_data = {$urandom, $urandom}; mdl[i] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 300; i++) begin
      int a;
      a = $urandom_range(0, 255);
      @(negedge clk) rd_addr = 8'(a);
      @(posedge clk) #1;
      checks++;
      if (rd_data !== mdl[a]) begin failures++; $display("FAIL addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
