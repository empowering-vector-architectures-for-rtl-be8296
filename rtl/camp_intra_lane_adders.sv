// camp_intra_lane_adders -- the 16 intra-lane adders of one lane.
//
// Adder (r,c) sums the products of the lane that belong to element (r,c) of
// the 4x4 result tile, i.e. A[r][k]*B[k][c] for every k held by the lane:
//   INT8: the lane holds k = 2L, 2L+1; the sum is p8[r*4+c] + p8[16+r*4+c]
//         (one product from each half).
//   INT4: the lane holds k = 4L..4L+3. In half h, A nibble 2i+p is element
//         (row 2*(i%2)+p, column 2h+i/2) and B nibble 2j+q is element
//         (row 2h+j/2, column 2*(j%2)+q). Only pairs with equal k are part of
//         the matrix product: i = 2kk + r/2, j = 2kk + c/2, sub-product
//         2*(r%2) + (c%2), for h, kk in {0,1} -- four terms per output. The
//         other half of the 8x8 outer products (different k) is not used.
// Output sum[c*4+r] (column-major). Purely combinational.
//
// The count of 16 adders and their index-wise summation follow the
// architecture; which 4-bit products are selected is derived here from the
// operand layout, the paper not spelling it out.
module camp_intra_lane_adders
  import camp_pkg::*;
(
  input  camp_mode_e             mode,
  input  p8_t [NMUL-1:0]         p8,
  input  p4_t [NMUL-1:0][3:0]    p4,
  output lsum_t [NOUT-1:0]       sum
);
  always_comb begin
    for (int r = 0; r < TILE; r++) begin
      for (int c = 0; c < TILE; c++) begin
        lsum_t s;
        s = '0;
        if (mode == MODE_INT8) begin
          for (int h = 0; h < 2; h++)
            s += LSUM_W'(p8[h*16 + r*4 + c]);
        end else begin
          for (int h = 0; h < 2; h++)
            for (int kk = 0; kk < 2; kk++)
              s += LSUM_W'(p4[h*16 + (2*kk + r/2)*4 + (2*kk + c/2)][2*(r%2) + (c%2)]);
        end
        sum[out_idx(r, c)] = s;
      end
    end
  end
endmodule
