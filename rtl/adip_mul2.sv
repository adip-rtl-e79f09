// adip_mul2: 2-bit x 2-bit multiplier, the elementary cell of the ADiP PE.
//
// Each operand is a 2-bit digit that is either unsigned (0..3) or two's
// complement (-2..1), as chosen by a_signed / b_signed. The digit is extended
// by one bit according to its flag and the two 3-bit values are multiplied,
// giving a signed 6-bit product (range -6..9). Purely combinational.
// The paper builds its PE from 2-bit multipliers; the signed/unsigned digit
// control is this design's choice for handling two's complement operands.
module adip_mul2 (
  input  logic [1:0]        a,
  input  logic              a_signed,
  input  logic [1:0]        b,
  input  logic              b_signed,
  output logic signed [5:0] p
);
  logic signed [2:0] a_ext, b_ext;

  always_comb begin
    a_ext = {a_signed & a[1], a};
    b_ext = {b_signed & b[1], b};
    p     = 6'(a_ext) * 6'(b_ext);
  end
endmodule
