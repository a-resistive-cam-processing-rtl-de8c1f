// recam_reduction_net -- connects the ICs' responses to the microcontroller.
//
// The paper only names a reduction network joining the ICs to the
// microcontroller. This design makes it a bitwise OR over all ICs of the
// registered "any" flags and read words: the system-wide "some row is
// tagged" answer, and the read word of the single tagged row (rows not
// tagged contribute zeros). The OR is built as a balanced binary tree of
// N_ICS-1 two-input stages so its depth is log2(N_ICS).
// Interface: rsp_in holds one response per IC; rsp_out is combinational.
// The global any flag is also fed back to every IC for CMD_CMP_CAND.
module recam_reduction_net
  import recam_pkg::*;
#(
  parameter int unsigned N = N_ICS
) (
  input  recam_rsp_t rsp_in [N],
  output recam_rsp_t rsp_out
);

  // Heap-ordered tree: node k has children 2k+1 and 2k+2; leaves are N-1..2N-2.
  recam_rsp_t node [2*N-1];

  always_comb begin
    for (int unsigned i = 0; i < N; i++) node[N-1+i] = rsp_in[i];
    for (int i = int'(N) - 2; i >= 0; i--) begin
      node[i].any   = node[2*i+1].any   | node[2*i+2].any;
      node[i].rdata = node[2*i+1].rdata | node[2*i+2].rdata;
    end
  end

  assign rsp_out = node[0];

endmodule
