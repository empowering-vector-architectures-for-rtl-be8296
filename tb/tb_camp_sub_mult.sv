// tb_camp_sub_mult -- exhaustive check of the 4-bit building-block multiplier
// for every operand pair and every signed/unsigned combination.
module tb_camp_sub_mult;
  logic [3:0] a, b;
  logic       as, bs;
  logic signed [8:0] p;
  int checks = 0, failures = 0;

  camp_sub_mult dut (.a(a), .a_signed(as), .b(b), .b_signed(bs), .p(p));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int sa = 0; sa < 2; sa++)
      for (int sb = 0; sb < 2; sb++)
        for (int x = 0; x < 16; x++)
          for (int y = 0; y < 16; y++) begin
            int ea, eb;
            a = 4'(x); b = 4'(y); as = 1'(sa); bs = 1'(sb);
            ea = (sa != 0 && x >= 8) ? x - 16 : x;
            eb = (sb != 0 && y >= 8) ? y - 16 : y;
            #1;
            checks++;
            if (int'(p) != ea * eb) begin
              failures++;
              if (failures < 10) $display("FAIL a=%0d(s%0d) b=%0d(s%0d) p=%0d exp=%0d", x, sa, y, sb, p, ea*eb);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
