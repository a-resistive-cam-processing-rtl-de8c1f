// recam_regfile -- scalar register file of the ReCAM microcontroller.
//
// NREGS registers of 32 bits with two combinational read ports and one
// write port (written at the rising edge). Register 0 always reads zero.
// A third read port lets the host read results (for example the alignment
// score) after a program halts. The paper only names the register file;
// its size and ports are this design's choices. Reset clears all registers.
module recam_regfile
  import recam_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  ra_addr,
  output logic [31:0] ra_data,
  input  logic [4:0]  rb_addr,
  output logic [31:0] rb_data,
  input  logic [4:0]  rc_addr,
  output logic [31:0] rc_data,
  input  logic        wr_en,
  input  logic [4:0]  wr_addr,
  input  logic [31:0] wr_data
);

  logic [31:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NREGS); i++) regs[i] <= '0;
    end else if (wr_en && wr_addr != 5'd0) begin
      regs[wr_addr] <= wr_data;
    end
  end

  assign ra_data = (ra_addr == 5'd0) ? 32'd0 : regs[ra_addr];
  assign rb_data = (rb_addr == 5'd0) ? 32'd0 : regs[rb_addr];
  assign rc_data = (rc_addr == 5'd0) ? 32'd0 : regs[rc_addr];

endmodule
