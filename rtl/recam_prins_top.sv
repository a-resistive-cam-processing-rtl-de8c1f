// recam_prins_top -- ReCAM processing-in-storage system.
//
// One microcontroller drives N_ICS ReCAM crossbar ICs of ROWS rows each,
// following the paper's system figure: every IC receives the same command,
// KEY and MASK; the ICs' TAG columns are daisy-chained (bottom row of IC k
// feeds the top row of IC k+1) so shifts cross IC boundaries; an OR
// reduction network returns the ICs' answers to the microcontroller and
// feeds the global "any" flag back to the ICs. Default size is the paper's
// simulated system: 32 ICs x 8M rows x 256 bits = 8 GB of active storage.
//
// Ports: the host loads programs, user truth tables and row data through
// the microcontroller's host port while it is halted (see recam_mcu), starts
// a program with start and reads registers when halted is set. chain_in is
// the TAG entering the top row of IC 0 (tie to 0: the zero padding the
// Smith-Waterman shifts rely on); chain_out is the TAG leaving the last IC.
// cmd_mon shows the command on the array bus each cycle.
module recam_prins_top
  import recam_pkg::*;
#(
  parameter int unsigned NIC        = N_ICS,
  parameter int unsigned ROWS       = ROWS_PER_IC,
  parameter int unsigned IMEM_DEPTH = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          halted,
  input  logic                          imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_waddr,
  input  instr_t                        imem_wdata,
  input  logic                          tt_entry_we,
  input  logic [5:0]                    tt_entry_idx,
  input  tt_entry_t                     tt_entry_wdata,
  input  logic                          tt_desc_we,
  input  tt_id_e                        tt_desc_tid,
  input  tt_desc_t                      tt_desc_wdata,
  input  recam_cmd_t                    host_cmd,
  output recam_rsp_t                    host_rsp,
  input  logic [4:0]                    host_reg_addr,
  output logic [31:0]                   host_reg_data,
  output logic [31:0]                   instr_count,
  output recam_cmd_t                    cmd_mon,
  input  logic                          chain_in,
  output logic                          chain_out
);

  recam_cmd_t cmd;
  recam_rsp_t rsp_ic [NIC];
  recam_rsp_t rsp;
  logic       chain [NIC+1];

  recam_mcu #(.IMEM_DEPTH(IMEM_DEPTH)) u_mcu (
    .clk            (clk),
    .rst_n          (rst_n),
    .start          (start),
    .halted         (halted),
    .imem_we        (imem_we),
    .imem_waddr     (imem_waddr),
    .imem_wdata     (imem_wdata),
    .tt_entry_we    (tt_entry_we),
    .tt_entry_idx   (tt_entry_idx),
    .tt_entry_wdata (tt_entry_wdata),
    .tt_desc_we     (tt_desc_we),
    .tt_desc_tid    (tt_desc_tid),
    .tt_desc_wdata  (tt_desc_wdata),
    .host_cmd       (host_cmd),
    .host_reg_addr  (host_reg_addr),
    .host_reg_data  (host_reg_data),
    .instr_count    (instr_count),
    .cmd            (cmd),
    .rsp            (rsp)
  );

  assign chain[0] = chain_in;

  for (genvar g = 0; g < int'(NIC); g++) begin : g_ic
    recam_crossbar #(.ROWS(ROWS), .IC_INDEX(g)) u_ic (
      .clk        (clk),
      .rst_n      (rst_n),
      .cmd        (cmd),
      .global_any (rsp.any),
      .tag_in     (chain[g]),
      .tag_out    (chain[g+1]),
      .rsp        (rsp_ic[g])
    );
  end

  recam_reduction_net #(.N(NIC)) u_red (
    .rsp_in  (rsp_ic),
    .rsp_out (rsp)
  );

  assign chain_out = chain[NIC];
  assign host_rsp  = rsp;
  assign cmd_mon   = cmd;

endmodule
