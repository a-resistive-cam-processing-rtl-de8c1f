// tb_recam_reduction_net -- random responses from 5 ICs; the network output
// must be the bitwise OR of all of them.
module tb_recam_reduction_net;
  import recam_pkg::*;
  localparam int N = 5;
  recam_rsp_t rsp_in [N];
  recam_rsp_t rsp_out;
  int checks = 0, failures = 0;
  recam_reduction_net #(.N(N)) dut (.*);
  initial begin
    for (int t = 0; t < 200; t++) begin
      recam_rsp_t e;
      e = '0;
      foreach (rsp_in[i]) begin
        rsp_in[i].any = ($urandom_range(0, 3) == 0);
        for (int k = 0; k < ROW_BITS / 32; k++) rsp_in[i].rdata[k*32 +: 32] = $urandom & $urandom;
        if (t % 3 == 0) rsp_in[i] = '0;
        e.any |= rsp_in[i].any;
        e.rdata |= rsp_in[i].rdata;
      end
      if (t % 7 == 0) begin rsp_in[t % N].any = 1; e.any = 1; end
      #1;
      checks++;
      if (rsp_out !== e) begin failures++; $display("FAIL t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
