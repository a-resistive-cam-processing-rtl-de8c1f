// recam_tag_logic -- the TAG column of one ReCAM crossbar IC.
//
// One TAG latch per row. Following the paper's TAG logic figure, the latch is
// loaded either from its row's sense amplifier (the match line after a
// compare) or, when shift select is set, from the TAG of the row above; the
// top row takes "TAG from prev. chip" and the bottom row drives "TAG to next
// chip", so the ICs of a system form one long TAG chain.
//
// Besides load and shift the latch supports, as this design's own choices:
//   CMD_CMP       TAG <= match, limited to the active row range unless cmp_all
//   CMD_CMP_TEST  TAG kept; any <= OR over rows of (TAG & match)
//   CMD_CMP_CAND  TAG <= TAG & match, but only if global_any is set (the
//                 system-wide result of the previous CMP_TEST); this gives
//                 Max Scalar two cycles per bit
//   CMD_TAG_ROW   TAG <= row_sel (one-hot row address decode)
// Interface: match/in_range/row_sel are per-row inputs valid in the command
// cycle; tag and any are registered and change one clock after the command.
// tag_out is the bottom row's latch. Reset clears every TAG.
module recam_tag_logic
  import recam_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_PER_IC
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cmd_op_e op,
  input  logic    cmp_all,
  input  logic    match    [ROWS],
  input  logic    in_range [ROWS],
  input  logic    row_sel  [ROWS],
  input  logic    global_any,
  input  logic    tag_in,          // TAG from previous chip
  output logic    tag      [ROWS],
  output logic    tag_out,         // TAG to next chip
  output logic    any              // some row tagged / test result
);

  assign tag_out = tag[ROWS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < ROWS; r++) tag[r] <= 1'b0;
      any <= 1'b0;
    end else begin
      unique case (op)
        CMD_CMP: begin
          logic a;
          a = 1'b0;
          for (int unsigned r = 0; r < ROWS; r++) begin
            tag[r] <= match[r] & (cmp_all | in_range[r]);
            a      = a | (match[r] & (cmp_all | in_range[r]));
          end
          any <= a;
        end
        CMD_CMP_TEST: begin
          logic a;
          a = 1'b0;
          for (int unsigned r = 0; r < ROWS; r++) a = a | (tag[r] & match[r]);
          any <= a;
        end
        CMD_CMP_CAND: begin
          if (global_any)
            for (int unsigned r = 0; r < ROWS; r++) tag[r] <= tag[r] & match[r];
        end
        CMD_SHIFT: begin
          tag[0] <= tag_in;
          for (int unsigned r = 1; r < ROWS; r++) tag[r] <= tag[r-1];
        end
        CMD_TAG_ROW: begin
          logic a;
          a = 1'b0;
          for (int unsigned r = 0; r < ROWS; r++) begin
            tag[r] <= row_sel[r];
            a      = a | row_sel[r];
          end
          any <= a;
        end
        default: ;
      endcase
    end
  end

endmodule
