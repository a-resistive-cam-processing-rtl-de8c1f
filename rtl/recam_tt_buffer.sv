// recam_tt_buffer -- the microcontroller's operation truth-tables buffer.
//
// ReCAM computes any function bit-serially by running its truth table row by
// row: for every bit position, each table row is one compare (rows whose
// input bits equal the table row get tagged) and one write (the tagged rows
// get the table row's outputs). The paper's buffer holds eight such tables,
// printed with their sizes: 8x2 Add, 8x2 Sub, 2x1 NOT, 4x1 XOR, 4x1 AND,
// 4x2 Max, 4x1 NAND and 4x1 NOR; part of it is user-programmable, and the
// paper's DNA base-pair match is such a custom table. All of these are held
// here. MAXSEL (D = FLAG1 ? B : A, the copy half of row-wise max) is this
// design's addition, needed because a 4x2 Max table only decides which
// operand is larger.
//
// Storage: an entry store of TT_ENTRIES tt_entry_t and a descriptor per
// table id (first entry, entry count, bit order, sign handling, whether
// the flags are cleared first). Reset loads the built-in tables; the user
// region (entries USER_BASE.. and ids TT_MATCH..) can be rewritten through
// the write ports, writes elsewhere are ignored. Reads are combinational:
// the descriptor of rd_tid and the 16 entries from its first entry on, so the
// sequencer can skip unused entries without spending cycles.
//
// Entry order matters where a write changes a compared bit (the carry or
// borrow flag, or an operand that is also the destination): a row must never
// be moved onto a table row still to come in the same bit. Add runs
// 000,010,001,011,111,101,110,100 (bits a,b,c of A, B, carry), which is
// safe for D separate and for the in-place B <- A + B. Sub runs
// 000,100,101,001,011,111,010,110 (a,b,w of A, B, borrow), safe for D
// separate and for the in-place A <- A - B. No single order allows both
// in-place forms of either (in-place B <- A - B swaps rows between 001 and
// 011, which one pass cannot do).
module recam_tt_buffer
  import recam_pkg::*;
#(
  parameter int unsigned USER_BASE = 48
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // read side (sequencer)
  input  tt_id_e                        rd_tid,
  output tt_desc_t                      rd_desc,
  output tt_entry_t                     rd_tbl [16],   // entries first..first+15
  // user programming side
  input  logic                          wr_entry_en,
  input  logic [$clog2(TT_ENTRIES)-1:0] wr_entry_idx,
  input  tt_entry_t                     wr_entry,
  input  logic                          wr_desc_en,
  input  tt_id_e                        wr_desc_tid,
  input  tt_desc_t                      wr_desc
);

  tt_entry_t entries [TT_ENTRIES];
  tt_desc_t  descs   [TT_IDS];

  function automatic tt_entry_t ent(logic [3:0] cv, logic [3:0] cc, logic [2:0] wv, logic [2:0] we);
    tt_entry_t e;
    e.cmp_val  = cv;
    e.cmp_care = cc;
    e.wr_val   = wv;
    e.wr_en    = we;
    return e;
  endfunction

  function automatic tt_desc_t dsc(int first, int count, logic msb, logic sgn, logic clr);
    tt_desc_t d;
    d.first       = 6'(first);
    d.count       = 4'(count);
    d.msb_first   = msb;
    d.signed_msb  = sgn;
    d.clear_flags = clr;
    return d;
  endfunction

  // Full-adder / full-subtractor row for inputs a (A bit), b (B bit), c (flag).
  function automatic tt_entry_t add_row(logic [2:0] abc);
    logic a, b, c;
    {a, b, c} = abc;
    return ent({1'b0, c, b, a}, 4'b0111, {1'b0, (a & b) | (a & c) | (b & c), a ^ b ^ c}, 3'b011);
  endfunction

  function automatic tt_entry_t sub_row(logic [2:0] abw);
    logic a, b, w;
    {a, b, w} = abw;
    return ent({1'b0, w, b, a}, 4'b0111, {1'b0, (~a & b) | (~a & w) | (b & w), a ^ b ^ w}, 3'b011);
  endfunction

  // Two-input logic row: D = f(a, b).
  function automatic tt_entry_t log_row(logic [1:0] ab, logic d);
    return ent({2'b00, ab[0], ab[1]}, 4'b0011, {2'b00, d}, 3'b001);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(TT_ENTRIES); i++) entries[i] <= '0;
      for (int i = 0; i < int'(TT_IDS); i++) descs[i] <= '0;
      // 8x2 Add
      entries[0] <= add_row(3'b000); entries[1] <= add_row(3'b010);
      entries[2] <= add_row(3'b001); entries[3] <= add_row(3'b011);
      entries[4] <= add_row(3'b111); entries[5] <= add_row(3'b101);
      entries[6] <= add_row(3'b110); entries[7] <= add_row(3'b100);
      descs[TT_ADD] <= dsc(0, 8, 1'b0, 1'b0, 1'b1);
      // 8x2 Sub
      entries[8]  <= sub_row(3'b000); entries[9]  <= sub_row(3'b100);
      entries[10] <= sub_row(3'b101); entries[11] <= sub_row(3'b001);
      entries[12] <= sub_row(3'b011); entries[13] <= sub_row(3'b111);
      entries[14] <= sub_row(3'b010); entries[15] <= sub_row(3'b110);
      descs[TT_SUB] <= dsc(8, 8, 1'b0, 1'b0, 1'b1);
      // 2x1 NOT
      entries[16] <= ent(4'b0000, 4'b0001, 3'b001, 3'b001);
      entries[17] <= ent(4'b0001, 4'b0001, 3'b000, 3'b001);
      descs[TT_NOT] <= dsc(16, 2, 1'b0, 1'b0, 1'b0);
      // 4x1 XOR, AND, NAND, NOR  (rows ab = 00, 01, 10, 11)
      for (int k = 0; k < 4; k++) begin
        logic [1:0] ab;
        ab = 2'(k);
        entries[18+k] <= log_row(ab, ab[1] ^ ab[0]);
        entries[22+k] <= log_row(ab, ab[1] & ab[0]);
        entries[30+k] <= log_row(ab, ~(ab[1] & ab[0]));
        entries[34+k] <= log_row(ab, ~(ab[1] | ab[0]));
      end
      descs[TT_XOR]  <= dsc(18, 4, 1'b0, 1'b0, 1'b0);
      descs[TT_AND]  <= dsc(22, 4, 1'b0, 1'b0, 1'b0);
      descs[TT_NAND] <= dsc(30, 4, 1'b0, 1'b0, 1'b0);
      descs[TT_NOR]  <= dsc(34, 4, 1'b0, 1'b0, 1'b0);
      // 4x2 Max: undecided rows (FLAG0 = FLAG1 = 0) decide at the first
      // differing bit, MSB first. Rows 00 and 11 write nothing.
      entries[26] <= ent(4'b0000, 4'b1111, 3'b000, 3'b000);
      entries[27] <= ent(4'b0001, 4'b1111, 3'b010, 3'b010);  // A=1,B=0: A>B
      entries[28] <= ent(4'b0010, 4'b1111, 3'b100, 3'b100);  // A=0,B=1: A<B
      entries[29] <= ent(4'b0011, 4'b1111, 3'b000, 3'b000);
      descs[TT_MAXCMP] <= dsc(26, 4, 1'b1, 1'b1, 1'b1);
      // MAXSEL: D = FLAG1 ? B : A
      entries[38] <= ent(4'b1010, 4'b1010, 3'b001, 3'b001);
      entries[39] <= ent(4'b1000, 4'b1010, 3'b000, 3'b001);
      entries[40] <= ent(4'b0001, 4'b1001, 3'b001, 3'b001);
      entries[41] <= ent(4'b0000, 4'b1001, 3'b000, 3'b001);
      descs[TT_MAXSEL] <= dsc(38, 4, 1'b0, 1'b0, 1'b0);
      // User region: DNA base-pair match, FLAG0 <= 1 where the bases differ
      entries[USER_BASE]   <= ent(4'b0001, 4'b0011, 3'b010, 3'b010);
      entries[USER_BASE+1] <= ent(4'b0010, 4'b0011, 3'b010, 3'b010);
      descs[TT_MATCH] <= dsc(int'(USER_BASE), 2, 1'b0, 1'b0, 1'b1);
    end else begin
      if (wr_entry_en && (32'(wr_entry_idx) >= USER_BASE)) entries[wr_entry_idx] <= wr_entry;
      if (wr_desc_en && (wr_desc_tid >= TT_MATCH)) descs[wr_desc_tid] <= wr_desc;
    end
  end

  assign rd_desc  = descs[rd_tid];
  always_comb
    for (int unsigned i = 0; i < 16; i++)
      rd_tbl[i] = entries[6'(rd_desc.first + 6'(i))];

endmodule
