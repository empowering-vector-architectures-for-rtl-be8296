// camp_hybrid_mult -- 8-bit signed hybrid multiplier built from four 4-bit
// sub-multipliers.
//
// With A = a1*2^4 + a0 and B = b1*2^4 + b0 the product is
//   P = (a1*b1) << 8 + (a1*b0 + a0*b1) << 4 + a0*b0.
// Four camp_sub_mult instances form the four partial products; one adder sums
// the two mid products, which are shifted by 4, the high product is shifted
// by 8, and a final adder forms P (INT8 mode, output p8). In INT4 mode each
// byte holds two signed 4-bit elements (element 0 in the low nibble) and the
// four sub-products are the 2x2 outer product of those elements, returned
// unchanged on p4: p4[2*i+j] = a_nibble[i] * b_nibble[j].
//
// Purely combinational; the lane adds the registers around it. The
// decomposition follows the architecture. The sign handling (signed high
// nibbles, unsigned low nibbles in INT8 mode, all nibbles signed in INT4 mode)
// is this implementation's choice.
module camp_hybrid_mult
  import camp_pkg::*;
(
  input  camp_mode_e       mode,
  input  logic [7:0]       a,
  input  logic [7:0]       b,
  output p8_t              p8,
  output p4_t [3:0]        p4
);
  logic        lo_signed;        // low nibbles are signed only in INT4 mode
  logic signed [8:0] sp [4];     // sub-products, index 2*i+j (i: a nibble, j: b nibble)
  logic signed [P8_W-1:0] mid, hi_sh, mid_sh;

  assign lo_signed = (mode == MODE_INT4);

  for (genvar i = 0; i < 2; i++) begin : g_a
    for (genvar j = 0; j < 2; j++) begin : g_b
      camp_sub_mult #(.N(4)) u_sub (
        .a       (a[4*i +: 4]),
        .a_signed(i == 1 ? 1'b1 : lo_signed),
        .b       (b[4*j +: 4]),
        .b_signed(j == 1 ? 1'b1 : lo_signed),
        .p       (sp[2*i+j])
      );
    end
  end

  always_comb begin
    // a1*b0 + a0*b1, then shift by n; a1*b1 shifted by 2n.
    mid    = P8_W'(sp[2]) + P8_W'(sp[1]);
    mid_sh = mid <<< 4;
    hi_sh    = P8_W'(sp[3]) <<< 8;
    p8       = hi_sh + mid_sh + P8_W'(sp[0]);
    for (int k = 0; k < 4; k++) p4[k] = P4_W'(sp[k]);
  end
endmodule
