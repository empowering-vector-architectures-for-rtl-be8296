// tb_camp_hybrid_mult -- exhaustive check of the 8-bit hybrid multiplier:
// every signed 8x8 product in INT8 mode and, in INT4 mode, the four signed
// 4x4 products of the nibble pairs (element 0 in the low nibble).
module tb_camp_hybrid_mult;
  import camp_pkg::*;
  camp_mode_e mode;
  logic [7:0] a, b;
  p8_t        p8;
  p4_t [3:0]  p4;
  int checks = 0, failures = 0;

  camp_hybrid_mult dut (.mode(mode), .a(a), .b(b), .p8(p8), .p4(p4));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int s4(int v); return v >= 8 ? v - 16 : v; endfunction

  initial begin
    for (int x = 0; x < 256; x++)
      for (int y = 0; y < 256; y++) begin
        a = 8'(x); b = 8'(y);
        mode = MODE_INT8; #1;
        checks++;
        if (int'(p8) != int'($signed(a)) * int'($signed(b))) begin
          failures++;
          if (failures < 10) $display("FAIL int8 %0d*%0d = %0d", $signed(a), $signed(b), p8);
        end
        mode = MODE_INT4; #1;
        for (int i = 0; i < 2; i++)
          for (int j = 0; j < 2; j++) begin
            int exp;
            exp = s4((x >> (4*i)) & 15) * s4((y >> (4*j)) & 15);
            checks++;
            if (int'(p4[2*i+j]) != exp) begin
              failures++;
              if (failures < 10) $display("FAIL int4 a=%h b=%h i=%0d j=%0d got %0d exp %0d", a, b, i, j, p4[2*i+j], exp);
            end
          end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
