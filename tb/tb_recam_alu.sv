// tb_recam_alu -- random operands (with small and extreme values) for add,
// subtract, signed max and min, and the signed less-than flag.
module tb_recam_alu;
  logic [1:0] op;
  logic [31:0] a, b, y;
  logic lt;
  int checks = 0, failures = 0;
  recam_alu dut (.*);
  initial begin
    for (int i = 0; i < 1000; i++) begin
      int sa, sb, e;
      a = (i % 5 == 0) ? 32'h8000_0000 : (i % 3 == 0) ? $urandom_range(0, 10) : $urandom;
      b = (i % 4 == 0) ? 32'h7FFF_FFFF : (i % 3 == 1) ? -$urandom_range(0, 10) : $urandom;
      op = 2'(i);
      sa = int'(a); sb = int'(b);
      e = op == 0 ? sa + sb : op == 1 ? sa - sb : op == 2 ? (sa > sb ? sa : sb) : (sa < sb ? sa : sb);
      #1;
      checks += 2;
      if (y !== 32'(e)) begin failures++; $display("FAIL op %0d", op); end
      if (lt !== (sa < sb)) begin failures++; $display("FAIL lt"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
