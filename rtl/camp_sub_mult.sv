// camp_sub_mult -- 4-bit building-block multiplier of the hybrid multiplier.
//
// Multiplies two 4-bit operands. Each operand is taken as two's complement or
// as unsigned, as chosen by a_signed / b_signed: the hybrid multiplier needs
// the low nibble of a signed byte to be unsigned and its high nibble signed,
// while in 4-bit mode every nibble is a signed element. The operand is widened
// by one bit (a copy of its top bit when signed, 0 when unsigned) and a 5x5
// signed product is formed. Purely combinational.
//
// The 4-bit building block follows the architecture; the one-bit widening
// used to handle mixed signedness is this implementation's choice.
module camp_sub_mult #(
  parameter int N = 4
) (
  input  logic [N-1:0]        a,
  input  logic                a_signed,
  input  logic [N-1:0]        b,
  input  logic                b_signed,
  output logic signed [2*N:0] p
);
  logic signed [N:0] ax, bx;

  always_comb begin
    ax = $signed({a_signed & a[N-1], a});
    bx = $signed({b_signed & b[N-1], b});
    p  = (2*N+1)'(ax * bx);
  end
endmodule
