// tb_camp_outer_product -- checks the lane's 32-multiplier array on random
// and corner-case operands: in INT8 mode product h*16+i*4+j must be A byte
// 4h+i times B byte 4h+j; in INT4 mode the four sub-products of that
// multiplier must be the signed products of the nibbles of those bytes.
module tb_camp_outer_product;
  import camp_pkg::*;
  import camp_tb_pkg::*;
  camp_mode_e              mode;
  logic [63:0]             a, b;
  p8_t [NMUL-1:0]          p8;
  p4_t [NMUL-1:0][3:0]     p4;
  int checks = 0, failures = 0;

  camp_outer_product dut (.mode(mode), .a(a), .b(b), .p8(p8), .p4(p4));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      logic [511:0] va, vb;
      va = rand_vec(); vb = rand_vec();
      if (n == 0) begin va = '1; vb = '1; end
      if (n == 1) begin va = {64{8'h80}}; vb = {64{8'h80}}; end
      if (n == 2) begin va = {64{8'h88}}; vb = {64{8'h7f}}; end
      a = va[63:0]; b = vb[63:0];
      mode = MODE_INT8; #1;
      for (int h = 0; h < 2; h++)
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++) begin
            checks++;
            if (int'(p8[h*16+i*4+j]) != elem(va, 4*h+i, 0) * elem(vb, 4*h+j, 0)) begin
              failures++;
              if (failures < 10) $display("FAIL int8 h%0d i%0d j%0d", h, i, j);
            end
          end
      mode = MODE_INT4; #1;
      for (int h = 0; h < 2; h++)
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++)
            for (int p = 0; p < 2; p++)
              for (int q = 0; q < 2; q++) begin
                checks++;
                if (int'(p4[h*16+i*4+j][2*p+q]) !=
                    elem(va, 8*h + 2*i + p, 1) * elem(vb, 8*h + 2*j + q, 1)) begin
                  failures++;
                  if (failures < 10) $display("FAIL int4 h%0d i%0d j%0d p%0d q%0d", h, i, j, p, q);
                end
              end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
