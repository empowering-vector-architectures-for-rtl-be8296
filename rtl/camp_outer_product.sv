// camp_outer_product -- the hybrid-multiplier array of one lane.
//
// A lane receives 64 bits of A and 64 bits of B and splits each into two
// 32-bit halves. Half h holds 4 bytes of each operand; multiplier
// m = h*16 + i*4 + j multiplies A byte 4h+i by B byte 4h+j, so each half is a
// full 4x4 outer product and the 32 multipliers cover both halves. In INT8
// mode a byte is one element (A column 2L+h, row i; B row 2L+h, column j for
// lane L). In INT4 mode a byte holds two 4-bit elements and the four
// sub-multipliers of every hybrid multiplier give the 2x2 outer product of
// those, so each half becomes an 8x8 outer product of 4-bit elements, 128
// 4-bit products per lane.
//
// Purely combinational. The 32 multipliers, the split into two halves and the
// 8x8 outer products in 4-bit mode follow the architecture; the numbering of
// the outputs is this implementation's.
module camp_outer_product
  import camp_pkg::*;
(
  input  camp_mode_e             mode,
  input  logic [LANE_W-1:0]      a,
  input  logic [LANE_W-1:0]      b,
  output p8_t [NMUL-1:0]         p8,
  output p4_t [NMUL-1:0][3:0]    p4
);
  for (genvar h = 0; h < 2; h++) begin : g_half
    for (genvar i = 0; i < 4; i++) begin : g_row
      for (genvar j = 0; j < 4; j++) begin : g_col
        camp_hybrid_mult u_mul (
          .mode(mode),
          .a   (a[8*(4*h+i) +: 8]),
          .b   (b[8*(4*h+j) +: 8]),
          .p8  (p8[h*16 + i*4 + j]),
          .p4  (p4[h*16 + i*4 + j])
        );
      end
    end
  end
endmodule
