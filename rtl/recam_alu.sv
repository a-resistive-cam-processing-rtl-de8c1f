// recam_alu -- scalar ALU of the ReCAM microcontroller.
//
// Combinational 32-bit two's-complement unit for the control program:
// add, subtract, signed max and min (the Smith-Waterman program keeps the
// running best score with max, line 17 of its loop), and a signed
// less-than flag for branches. The paper only names the ALU; its operation
// set is this design's choice, sized to what the control programs need.
module recam_alu (
  input  logic [1:0]  op,      // 0 add, 1 sub, 2 max, 3 min
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y,
  output logic        lt       // signed a < b
);

  always_comb begin
    lt = $signed(a) < $signed(b);
    unique case (op)
      2'd0: y = a + b;
      2'd1: y = a - b;
      2'd2: y = lt ? b : a;
      default: y = lt ? a : b;
    endcase
  end

endmodule
