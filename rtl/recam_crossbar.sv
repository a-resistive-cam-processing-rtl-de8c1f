// recam_crossbar -- one ReCAM crossbar IC: ROWS rows of ROW_BITS resistive
// CAM cells, the KEY and MASK registers' broadcast, and the TAG column.
//
// How it works. Every clock the IC takes one array command from the
// microcontroller (the same command goes to every IC of the system):
//   compare   every row compares its MASKed bits with KEY in parallel; the
//             match lines load the TAG latches (recam_tag_logic)
//   write     every tagged row takes KEY in its MASKed bits (parallel write)
//   write-tag every row in the active range takes its own TAG bit in its
//             MASKed bits; after a TAG shift this completes the paper's
//             three-cycle "shift down one row" per bit
//   shift     TAG moves one row down, the top row from the previous IC
//   tag-row   TAG marks one addressed row (used for host/microcontroller
//             reads and writes of single rows)
//   read      rdata <= OR over tagged rows of (row & MASK); with one row
//             tagged this is that row's masked word
//   set-range the active row range [lo, hi] (global row numbers) that
//             compares and write-tag are limited to; the paper marks the
//             rows an instruction affects with [*] but does not say how the
//             range is held, so a pair of range registers per IC is this
//             design's choice
// The bitcells (2T2R), match-line precharge and sense amplifiers are analog;
// here a row's match is the digital function they compute.
// Timing: command sampled at the rising edge; TAG, any and rdata are
// registered and visible the cycle after. Memory contents are not reset
// (non-volatile storage); TAG and the range are.
module recam_crossbar
  import recam_pkg::*;
#(
  parameter int unsigned ROWS     = ROWS_PER_IC,
  parameter int unsigned IC_INDEX = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  recam_cmd_t cmd,
  input  logic       global_any,   // system-wide OR of the ICs' any flags
  input  logic       tag_in,       // TAG from previous chip
  output logic       tag_out,      // TAG to next chip
  output recam_rsp_t rsp
);

  localparam logic [ROW_AW-1:0] BASE = ROW_AW'(IC_INDEX * ROWS);

  logic [ROW_BITS-1:0] mem [ROWS];
  logic                match    [ROWS];
  logic                in_range [ROWS];
  logic                row_sel  [ROWS];
  logic                tag      [ROWS];
  logic [ROW_AW-1:0]   lo_q, hi_q;
  logic                any;

  // Match lines, range and row decode, all rows in parallel.
  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      logic [ROW_AW-1:0] g;
      g           = BASE + ROW_AW'(r);
      match[r]    = ((mem[r] ^ cmd.key) & cmd.mask) == '0;
      in_range[r] = (g >= lo_q) && (g <= hi_q);
      row_sel[r]  = (g == cmd.lo);
    end
  end

  recam_tag_logic #(.ROWS(ROWS)) u_tag (
    .clk        (clk),
    .rst_n      (rst_n),
    .op         (cmd.op),
    .cmp_all    (cmd.cmp_all),
    .match      (match),
    .in_range   (in_range),
    .row_sel    (row_sel),
    .global_any (global_any),
    .tag_in     (tag_in),
    .tag        (tag),
    .tag_out    (tag_out),
    .any        (any)
  );

  // Parallel write into the array.
  always_ff @(posedge clk) begin
    if (cmd.op == CMD_WRITE) begin
      for (int unsigned r = 0; r < ROWS; r++)
        if (tag[r]) mem[r] <= (mem[r] & ~cmd.mask) | (cmd.key & cmd.mask);
    end else if (cmd.op == CMD_WRITE_TAG) begin
      for (int unsigned r = 0; r < ROWS; r++)
        if (in_range[r]) mem[r] <= (mem[r] & ~cmd.mask) | ({ROW_BITS{tag[r]}} & cmd.mask);
    end
  end

  // Range registers and read data.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lo_q      <= '1;
      hi_q      <= '0;
      rsp.rdata <= '0;
    end else begin
      if (cmd.op == CMD_SET_RANGE) begin
        lo_q <= cmd.lo;
        hi_q <= cmd.hi;
      end
      if (cmd.op == CMD_READ) begin
        logic [ROW_BITS-1:0] acc;
        acc = '0;
        for (int unsigned r = 0; r < ROWS; r++)
          if (tag[r]) acc = acc | (mem[r] & cmd.mask);
        rsp.rdata <= acc;
      end
    end
  end

  assign rsp.any = any;

endmodule
