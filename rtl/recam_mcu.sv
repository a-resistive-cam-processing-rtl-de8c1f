// recam_mcu -- the ReCAM microcontroller.
//
// Runs a program from its instruction memory and drives the array bus that
// all ReCAM ICs share. Its parts follow the paper's microcontroller figure:
// instruction memory, register file, ALU and the operation truth-tables
// buffer; the associative sequencer turns each vector instruction into the
// compare/write/shift cycles of the array. The instruction set (recam_pkg
// iop_e) and the three-state control below are this design's choices.
//
// Control: FETCH presents pc to the instruction memory, DECODE reads the
// word and the registers, then a scalar instruction completes (register
// write or branch) and a vector instruction is handed to the sequencer and
// waited for (EXEC/WAIT). Vector instructions name registers that hold row
// field bit positions, so one program text can rotate the three H
// antidiagonal buffers by renaming registers.
//
// Host side: while the controller is halted the host may write the
// instruction memory, write the user region of the truth-table buffer and
// put its own commands on the array bus (host_cmd, one per clock) to load
// and read rows; host_rsp mirrors the reduction network. start runs the
// program from address 0; halted is set by HALT. Host commands are ignored
// while a program runs.
module recam_mcu
  import recam_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host
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
  input  logic [4:0]                    host_reg_addr,
  output logic [31:0]                   host_reg_data,
  output logic [31:0]                   instr_count,   // instructions retired
  // array bus
  output recam_cmd_t                    cmd,
  input  recam_rsp_t                    rsp
);

  localparam int unsigned PCW = $clog2(IMEM_DEPTH);

  typedef enum logic [2:0] {S_HALT, S_FETCH, S_DECODE, S_EXEC, S_WAIT} state_e;
  state_e state;

  logic [PCW-1:0] pc;
  instr_t         ir;

  // ------------------------------------------------------------ parts
  recam_imem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk     (clk),
    .rd_addr (pc),
    .rd_data (ir),
    .wr_en   (imem_we && state == S_HALT),
    .wr_addr (imem_waddr),
    .wr_data (imem_wdata)
  );

  logic [31:0] ra_v, rb_v, rd_v;
  logic        rf_we;
  logic [31:0] rf_wdata;

  // The rd field is read through port C while running, and by the host
  // while halted.
  recam_regfile u_rf (
    .clk     (clk),
    .rst_n   (rst_n),
    .ra_addr (ir.ra),
    .ra_data (ra_v),
    .rb_addr (ir.rb),
    .rb_data (rb_v),
    .rc_addr ((state == S_HALT) ? host_reg_addr : ir.rd),
    .rc_data (rd_v),
    .wr_en   (rf_we),
    .wr_addr (ir.rd),
    .wr_data (rf_wdata)
  );
  assign host_reg_data = rd_v;

  logic [1:0]  alu_op;
  logic [31:0] alu_b, alu_y;
  logic        alu_lt;
  recam_alu u_alu (.op(alu_op), .a(ra_v), .b(alu_b), .y(alu_y), .lt(alu_lt));

  tt_id_e    tt_tid;
  tt_desc_t  tt_desc;
  tt_entry_t tt_tbl [16];
  recam_tt_buffer u_tt (
    .clk          (clk),
    .rst_n        (rst_n),
    .rd_tid       (tt_tid),
    .rd_desc      (tt_desc),
    .rd_tbl       (tt_tbl),
    .wr_entry_en  (tt_entry_we),
    .wr_entry_idx (tt_entry_idx),
    .wr_entry     (tt_entry_wdata),
    .wr_desc_en   (tt_desc_we),
    .wr_desc_tid  (tt_desc_tid),
    .wr_desc      (tt_desc_wdata)
  );

  logic        sq_valid, sq_ready, sq_done;
  seq_req_t    sq_req;
  logic [31:0] sq_result;
  recam_cmd_t  sq_cmd;
  recam_assoc_seq u_seq (
    .clk       (clk),
    .rst_n     (rst_n),
    .req_valid (sq_valid),
    .ready     (sq_ready),
    .req       (sq_req),
    .done      (sq_done),
    .result    (sq_result),
    .tt_tid    (tt_tid),
    .tt_desc   (tt_desc),
    .tt_tbl    (tt_tbl),
    .cmd       (sq_cmd),
    .rsp       (rsp)
  );

  assign cmd    = (state == S_HALT) ? host_cmd : sq_cmd;
  assign halted = (state == S_HALT);

  // ------------------------------------------------------------ decode
  logic is_vector;
  always_comb begin
    is_vector = 1'b0;
    unique case (ir.op)
      I_RANGE, I_VTT, I_VTTI, I_VSHIFT, I_VSETF, I_VMAXS, I_VREAD, I_VWRITE, I_VFILL:
        is_vector = 1'b1;
      default: ;
    endcase
  end

  always_comb begin
    sq_req        = '0;
    sq_req.tid    = tt_id_e'(ir.imm[3:0]);
    sq_req.col_d  = rd_v[7:0];
    sq_req.col_a  = ra_v[7:0];
    sq_req.col_b  = rb_v[7:0];
    sq_req.w      = ir.w;
    sq_req.row    = ROW_AW'(ra_v);
    sq_req.row_hi = ROW_AW'(rb_v);
    sq_req.scalar = ir.imm;
    unique case (ir.op)
      I_RANGE:  sq_req.kind = SQ_RANGE;
      I_VTT:    sq_req.kind = SQ_TT;
      I_VTTI: begin
        sq_req.kind   = SQ_TT;
        sq_req.b_imm  = 1'b1;
        sq_req.scalar = rb_v;
      end
      I_VSHIFT: sq_req.kind = SQ_SHIFT;
      I_VSETF: begin
        sq_req.kind  = SQ_SETF;
        sq_req.b_imm = ir.ra[0];
      end
      I_VMAXS:  sq_req.kind = SQ_MAXS;
      I_VREAD: begin
        sq_req.kind = SQ_READ;
        sq_req.row  = ROW_AW'(rb_v);
      end
      I_VWRITE: begin
        sq_req.kind   = SQ_WRITE;
        sq_req.row    = ROW_AW'(rb_v);
        sq_req.scalar = rd_v;
      end
      I_VFILL:  sq_req.kind = SQ_FILL;
      default:  sq_req.kind = SQ_RANGE;
    endcase
  end

  always_comb begin
    unique case (ir.op)
      I_SUB:   alu_op = 2'd1;
      I_MAX:   alu_op = 2'd2;
      I_MIN:   alu_op = 2'd3;
      default: alu_op = 2'd0;
    endcase
    alu_b = (ir.op == I_ADDI) ? ir.imm : rb_v;
  end

  // Register writes: scalar results in DECODE, vector results when the
  // sequencer finishes.
  always_comb begin
    rf_we    = 1'b0;
    rf_wdata = alu_y;
    if (state == S_DECODE) begin
      unique case (ir.op)
        I_LI:   begin rf_we = 1'b1; rf_wdata = ir.imm; end
        I_ADDI, I_ADD, I_SUB, I_MAX, I_MIN: rf_we = 1'b1;
        default: ;
      endcase
    end else if (state == S_WAIT && sq_done && (ir.op == I_VMAXS || ir.op == I_VREAD)) begin
      rf_we    = 1'b1;
      rf_wdata = sq_result;
    end
  end

  assign sq_valid = (state == S_EXEC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_HALT;
      pc          <= '0;
      instr_count <= '0;
    end else begin
      unique case (state)
        S_HALT: if (start) begin
          pc    <= '0;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_DECODE;          // imem read in flight
        S_DECODE: begin
          instr_count <= instr_count + 32'd1;
          if (is_vector) begin
            state <= S_EXEC;
          end else begin
            unique case (ir.op)
              I_HALT: state <= S_HALT;
              I_BLT: begin
                pc    <= alu_lt ? PCW'(ir.imm) : pc + PCW'(1);
                state <= S_FETCH;
              end
              I_JMP: begin
                pc    <= PCW'(ir.imm);
                state <= S_FETCH;
              end
              default: begin
                pc    <= pc + PCW'(1);
                state <= S_FETCH;
              end
            endcase
          end
        end
        S_EXEC: if (sq_ready) state <= S_WAIT;
        S_WAIT: if (sq_done) begin
          pc    <= pc + PCW'(1);
          state <= S_FETCH;
        end
        default: state <= S_HALT;
      endcase
    end
  end

endmodule
