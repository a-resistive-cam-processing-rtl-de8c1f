// recam_imem -- instruction memory of the ReCAM microcontroller.
//
// A DEPTH x 64-bit program store with one synchronous read port for the
// fetch stage and one write port through which the host loads a program.
// The paper only names the instruction memory; its depth, word width and
// synchronous read are this design's choices (64-bit words hold the
// instr_t format of recam_pkg). Timing: rd_data holds the word at rd_addr
// one clock after rd_addr is presented. Contents are not reset.
module recam_imem
  import recam_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output instr_t                   rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  instr_t                   wr_data
);

  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
