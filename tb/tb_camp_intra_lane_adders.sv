// tb_camp_intra_lane_adders -- drives the intra-lane adders from a
// multiplier array and compares the 16 sums with the lane's share of the
// matrix product computed from the element definition: k = 0,1 of a 4x2 by
// 2x4 product (INT8) or k = 0..3 of a 4x4 by 4x4 product (INT4).
module tb_camp_intra_lane_adders;
  import camp_pkg::*;
  import camp_tb_pkg::*;
  camp_mode_e              mode;
  logic [63:0]             a, b;
  p8_t [NMUL-1:0]          p8;
  p4_t [NMUL-1:0][3:0]     p4;
  lsum_t [NOUT-1:0]        sum;
  int checks = 0, failures = 0;

  camp_outer_product u_mul (.mode(mode), .a(a), .b(b), .p8(p8), .p4(p4));
  camp_intra_lane_adders dut (.mode(mode), .p8(p8), .p4(p4), .sum(sum));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      logic [511:0] va, vb;
      tile_t exp;
      va = rand_vec(); vb = rand_vec();
      if (n == 0) begin va = {64{8'h80}}; vb = {64{8'h80}}; end
      if (n == 1) begin va = {64{8'h88}}; vb = {64{8'h88}}; end
      a = va[63:0]; b = vb[63:0];
      for (int m = 0; m < 2; m++) begin
        mode = m ? MODE_INT4 : MODE_INT8;
        #1;
        exp = ref_tile(va, vb, m != 0, 0, m ? 4 : 2);
        for (int t = 0; t < 16; t++) begin
          checks++;
          if (int'(sum[t]) != exp[t]) begin
            failures++;
            if (failures < 10) $display("FAIL mode%0d t%0d got %0d exp %0d", m, t, sum[t], exp[t]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
