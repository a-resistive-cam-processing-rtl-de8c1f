// recam_assoc_seq -- associative sequencer of the microcontroller.
//
// Expands one associative (vector) operation into the stream of array
// commands, one per clock, that all ICs execute together. Operations:
//   SQ_TT     bit-serial truth-table pass over a w-bit field: optional flag
//             clear (compare + write), then for every bit position and every
//             table entry one compare and one write. Entries that write
//             nothing, or that cannot match a scalar B operand's bit, take no
//             cycle. Cycles: 2*[clear] + sum over bits of 2*(entries used).
//             Out-of-place add with a column operand: 2 + 32*8*2 = 514
//             (the paper's Table 1: 512 for C <- A + B).
//   SQ_SHIFT  move a w-bit field one row down: per bit compare-to-1 into
//             TAG, TAG shift, write TAG back: 3*w cycles (Table 1: 96 for
//             32 bits)
//   SQ_MAXS   max scalar over the active rows: tag the active rows, then MSB
//             first a test compare and a conditional AND per bit: 1 + 2*w
//             cycles (Table 1: 64 for 32 bits, without the first cycle).
//             Leaves TAG on the rows holding the maximum; result is the max.
//   SQ_SETF   rows whose FLAG0 equals b_imm get scalar in field D: 2 cycles
//   SQ_FILL   all active rows get scalar in field D: 2 cycles
//   SQ_READ   tag one row, read field A: result after 4 cycles
//   SQ_WRITE  tag one row, write scalar into field A: 2 cycles
//   SQ_RANGE  set the active row range: 1 cycle
// Interface: req is taken when req_valid and ready; done pulses for one
// cycle with result valid at the end. cmd is registered. rsp is the
// reduction network output (registered in the ICs). The sign bit of signed
// operations (max) is handled by inverting A/B compare values at the MSB.
// The command set and the scheduling are this design's choices; the bit
// serial truth-table method and the cycle counts are from the paper.
module recam_assoc_seq
  import recam_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        ready,
  input  seq_req_t    req,
  output logic        done,
  output logic [31:0] result,
  // truth-table buffer
  output tt_id_e      tt_tid,
  input  tt_desc_t    tt_desc,
  input  tt_entry_t   tt_tbl [16],
  // array
  output recam_cmd_t  cmd,
  input  recam_rsp_t  rsp
);

  typedef enum logic [3:0] {
    S_IDLE, S_CLR_WR, S_TT_CMP, S_TT_WR, S_SH_CMP, S_SH_SHIFT, S_SH_WR,
    S_MX_TEST, S_MX_CAND, S_ONE_WR, S_RD_OP, S_RD_W1, S_RD_W2, S_FIN
  } state_e;

  state_e      state;
  seq_req_t    r;
  logic [5:0]  k;        // bit step counter
  logic [3:0]  e;        // entry counter within the table
  logic        sel_any;  // MAXS: capture rsp.any for bit k-1 at the next edge
  logic [31:0] acc;
  logic [5:0]  mx_p;     // MAXS: bit position being captured

  localparam logic [ROW_BITS-1:0] ONE = ROW_BITS'(1);

  function automatic logic [ROW_BITS-1:0] bit_at(int unsigned pos);
    return ONE << pos;
  endfunction

  function automatic logic [31:0] wmask(logic [5:0] w);
    return (w >= 6'd32) ? 32'hFFFF_FFFF : ((32'd1 << w) - 32'd1);
  endfunction

  function automatic logic [ROW_BITS-1:0] field(logic [31:0] v, logic [5:0] w, logic [7:0] col);
    return ROW_BITS'(v & wmask(w)) << col;
  endfunction

  // Bit position of step kk of the current pass.
  function automatic logic [5:0] bpos_of(logic [5:0] kk);
    return tt_desc.msb_first ? (r.w - 6'd1 - kk) : kk;
  endfunction

  // Is entry ent usable at bit position p? Entries that write nothing, or
  // whose B value cannot equal a scalar B operand's bit, are skipped.
  function automatic logic used(tt_entry_t ent, logic [5:0] p);
    logic inv;
    inv = tt_desc.signed_msb && (p == r.w - 6'd1);
    if (ent.wr_en == '0) return 1'b0;
    if (r.b_imm && ent.cmp_care[1] && ((ent.cmp_val[1] ^ inv) != r.scalar[p])) return 1'b0;
    return 1'b1;
  endfunction

  function automatic recam_cmd_t cmp_cmd(tt_entry_t ent, logic [5:0] p);
    recam_cmd_t c;
    logic inv;
    inv = tt_desc.signed_msb && (p == r.w - 6'd1);
    c = '0;
    c.op = CMD_CMP;
    if (ent.cmp_care[0]) begin
      c.mask |= bit_at(r.col_a + p);
      if (ent.cmp_val[0] ^ inv) c.key |= bit_at(r.col_a + p);
    end
    if (ent.cmp_care[1] && !r.b_imm) begin
      c.mask |= bit_at(r.col_b + p);
      if (ent.cmp_val[1] ^ inv) c.key |= bit_at(r.col_b + p);
    end
    if (ent.cmp_care[2]) begin
      c.mask |= bit_at(COL_FLAG0);
      if (ent.cmp_val[2]) c.key |= bit_at(COL_FLAG0);
    end
    if (ent.cmp_care[3]) begin
      c.mask |= bit_at(COL_FLAG1);
      if (ent.cmp_val[3]) c.key |= bit_at(COL_FLAG1);
    end
    return c;
  endfunction

  function automatic recam_cmd_t wr_cmd(tt_entry_t ent, logic [5:0] p);
    recam_cmd_t c;
    c = '0;
    c.op = CMD_WRITE;
    if (ent.wr_en[0]) begin
      c.mask |= bit_at(r.col_d + p);
      if (ent.wr_val[0]) c.key |= bit_at(r.col_d + p);
    end
    if (ent.wr_en[1]) begin
      c.mask |= bit_at(COL_FLAG0);
      if (ent.wr_val[1]) c.key |= bit_at(COL_FLAG0);
    end
    if (ent.wr_en[2]) begin
      c.mask |= bit_at(COL_FLAG1);
      if (ent.wr_val[2]) c.key |= bit_at(COL_FLAG1);
    end
    return c;
  endfunction

  // Next usable entry: first in the current bit from entry e on, else the
  // first of the next bit. Found entries are issued without idle cycles.
  logic       nx_found, nx_next_bit;
  logic [3:0] nx_e;
  always_comb begin
    nx_found    = 1'b0;
    nx_next_bit = 1'b0;
    nx_e        = '0;
    for (int unsigned i = 0; i < 16; i++)
      if (!nx_found && (k < r.w) && (i >= 32'(e)) && (i < 32'(tt_desc.count)) && used(tt_tbl[i], bpos_of(k))) begin
        nx_found = 1'b1;
        nx_e     = 4'(i);
      end
    for (int unsigned i = 0; i < 16; i++)
      if (!nx_found && (k + 6'd1 < r.w) && (i < 32'(tt_desc.count)) && used(tt_tbl[i], bpos_of(k + 6'd1))) begin
        nx_found    = 1'b1;
        nx_next_bit = 1'b1;
        nx_e        = 4'(i);
      end
  end

  logic [5:0] nx_k;
  assign nx_k = nx_next_bit ? k + 6'd1 : k;

  // Max scalar: value of the bit captured at this edge.
  logic [31:0] acc_next;
  always_comb begin
    acc_next = acc;
    if (sel_any) acc_next[mx_p] = rsp.any ^ (mx_p == r.w - 6'd1);
  end

  assign ready  = (state == S_IDLE);
  // the table of a new request is looked up while it is being accepted
  assign tt_tid = (state == S_IDLE) ? req.tid : r.tid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      r       <= '0;
      k       <= '0;
      e       <= '0;
      sel_any <= 1'b0;
      acc     <= '0;
      mx_p    <= '0;
      cmd     <= '0;
      done    <= 1'b0;
      result  <= '0;
    end else begin
      cmd  <= '0;                 // NOP unless a state issues a command
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          r   <= req;
          k   <= '0;
          e   <= '0;
          acc <= '0;
          sel_any <= 1'b0;
          unique case (req.kind)
            SQ_TT: begin
              // table descriptor is looked up with req.tid this cycle
              if (tt_desc.clear_flags) begin
                cmd.op <= CMD_CMP;     // flag clear: tag every active row
                state  <= S_CLR_WR;
              end else begin
                state  <= S_TT_CMP;
              end
            end
            SQ_SHIFT: state <= S_SH_CMP;
            SQ_MAXS: begin               // tag all active rows
              cmd.op <= CMD_CMP;
              state  <= S_MX_TEST;
            end
            SQ_SETF: begin
              cmd.op   <= CMD_CMP;
              cmd.key  <= req.b_imm ? bit_at(COL_FLAG0) : '0;
              cmd.mask <= bit_at(COL_FLAG0);
              state    <= S_ONE_WR;
            end
            SQ_FILL: begin
              cmd.op <= CMD_CMP;
              state  <= S_ONE_WR;
            end
            SQ_READ: begin
              cmd.op <= CMD_TAG_ROW;
              cmd.lo <= req.row;
              state  <= S_RD_OP;
            end
            SQ_WRITE: begin
              cmd.op <= CMD_TAG_ROW;
              cmd.lo <= req.row;
              state  <= S_ONE_WR;
            end
            SQ_RANGE: begin
              cmd.op <= CMD_SET_RANGE;
              cmd.lo <= req.row;
              cmd.hi <= req.row_hi;
              state  <= S_FIN;
            end
            default: state <= S_FIN;
          endcase
        end

        // ------------------------------------------------ truth tables
        S_CLR_WR: begin
          cmd.op   <= CMD_WRITE;
          cmd.mask <= bit_at(COL_FLAG0) | bit_at(COL_FLAG1);
          state    <= S_TT_CMP;
        end
        S_TT_CMP: begin
          if (!nx_found) begin
            state <= S_FIN;
          end else begin
            cmd   <= cmp_cmd(tt_tbl[nx_e], bpos_of(nx_k));
            k     <= nx_k;
            e     <= nx_e;
            state <= S_TT_WR;
          end
        end
        S_TT_WR: begin
          cmd   <= wr_cmd(tt_tbl[e], bpos_of(k));
          e     <= e + 4'd1;
          state <= S_TT_CMP;
        end

        // ------------------------------------------------ field shift
        S_SH_CMP: begin
          if (k >= r.w) begin
            state <= S_FIN;
          end else begin
            cmd.op      <= CMD_CMP;
            cmd.cmp_all <= 1'b1;       // the row above the range is a source
            cmd.key     <= bit_at(r.col_a + k);
            cmd.mask    <= bit_at(r.col_a + k);
            state       <= S_SH_SHIFT;
          end
        end
        S_SH_SHIFT: begin
          cmd.op <= CMD_SHIFT;
          state  <= S_SH_WR;
        end
        S_SH_WR: begin
          cmd.op   <= CMD_WRITE_TAG;
          cmd.mask <= bit_at(r.col_a + k);
          k        <= k + 6'd1;
          state    <= S_SH_CMP;
        end

        // ------------------------------------------------ max scalar
        S_MX_TEST: begin
          acc     <= acc_next;
          sel_any <= 1'b0;
          if (k >= r.w) begin
            // sign-extend a field narrower than 32 bits
            result <= acc_next | ((r.w < 6'd32 && acc_next[r.w - 6'd1]) ? ~wmask(r.w) : 32'd0);
            state  <= S_FIN;
          end else begin
            // sign bit: look for rows holding 0 (non-negative); others: 1
            cmd.op   <= CMD_CMP_TEST;
            cmd.key  <= (k == 6'd0) ? '0 : bit_at(r.col_a + (r.w - 6'd1 - k));
            cmd.mask <= bit_at(r.col_a + (r.w - 6'd1 - k));
            state    <= S_MX_CAND;
          end
        end
        S_MX_CAND: begin
          cmd.op   <= CMD_CMP_CAND;
          cmd.key  <= (k == 6'd0) ? '0 : bit_at(r.col_a + (r.w - 6'd1 - k));
          cmd.mask <= bit_at(r.col_a + (r.w - 6'd1 - k));
          mx_p     <= r.w - 6'd1 - k;
          k        <= k + 6'd1;
          sel_any  <= 1'b1;
          state    <= S_MX_TEST;
        end

        // ------------------------------------------------ single writes
        S_ONE_WR: begin
          cmd.op <= CMD_WRITE;
          if (r.kind == SQ_WRITE) begin
            cmd.key  <= field(r.scalar, r.w, r.col_a);
            cmd.mask <= field(32'hFFFF_FFFF, r.w, r.col_a);
          end else begin
            cmd.key  <= field(r.scalar, r.w, r.col_d);
            cmd.mask <= field(32'hFFFF_FFFF, r.w, r.col_d);
          end
          state <= S_FIN;
        end

        // ------------------------------------------------ row read
        S_RD_OP: begin
          cmd.op   <= CMD_READ;
          cmd.mask <= field(32'hFFFF_FFFF, r.w, r.col_a);
          state    <= S_RD_W1;
        end
        S_RD_W1: state <= S_RD_W2;
        S_RD_W2: begin
          result <= 32'(rsp.rdata >> r.col_a) & wmask(r.w);
          state  <= S_FIN;
        end

        S_FIN: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
