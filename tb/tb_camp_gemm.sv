// tb_camp_gemm -- runs the CAMP micro-kernel on the reduction depths of the
// evaluated layers, at the unit's default size.
//
// For one 4x4 output tile of C = A*B the micro-kernel issues ceil(k/16)
// INT8 (or ceil(k/32) INT4) camp operations back to back, each with the next
// 4x16 (4x32) slice of A packed column-major and the matching 16x4 (32x4)
// slice of B packed row-major, zero-padded at the end; the first op starts
// the tile. The test checks the final tile against an exact 64-bit reference
// computed from the matrices (so a 32-bit overflow would be caught), and that
// the tile completes in ops + 3 cycles after the first issue (one op per
// cycle, 4-cycle latency). k values: the distinct k of the CNN layers and of
// the square matrices evaluated for the design, in both modes, with random
// data and, for the largest k, with all elements at the most negative value.
// Then complete square products C = A*B (32x32x32 and 64x64x64) are run tile
// by tile, with the first op of each tile issued right after the last op of
// the previous one, and every element of C is checked.
module tb_camp_gemm;
  import camp_pkg::*;
  localparam int LAT = 4;
  localparam int KS [15] = '{27, 32, 64, 128, 147, 256, 363, 512, 576, 1024,
                             1152, 2304, 2400, 3456, 4608};

  logic clk = 0, rst_n = 0;
  logic         in_valid, in_acc_init;
  camp_mode_e   in_mode;
  logic [511:0] vs1, vs2, vd;
  logic         vd_valid;
  int checks = 0, failures = 0;
  longint cyc = 0;

  camp_unit dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_mode(in_mode),
                 .in_acc_init(in_acc_init), .vs1(vs1), .vs2(vs2),
                 .vd_valid(vd_valid), .vd(vd));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int A [4][4608];
  int B [4608][4];

  task automatic run_tile(int k, bit int4, bit extreme);
    int     kper, nops, w, lo, hi;
    longint c [4][4];
    longint t_first, t_done;
    int     nvalid;
    kper = int4 ? 32 : 16;
    w    = int4 ? 4 : 8;
    lo   = int4 ? -8 : -128;
    hi   = int4 ? 7 : 127;
    nops = (k + kper - 1) / kper;
    for (int kk = 0; kk < k; kk++)
      for (int i = 0; i < 4; i++) begin
        A[i][kk] = extreme ? lo : lo + int'($urandom % (hi - lo + 1));
        B[kk][i] = extreme ? lo : lo + int'($urandom % (hi - lo + 1));
      end
    for (int r = 0; r < 4; r++)
      for (int cc = 0; cc < 4; cc++) begin
        c[r][cc] = 0;
        for (int kk = 0; kk < k; kk++) c[r][cc] += longint'(A[r][kk]) * longint'(B[kk][cc]);
      end
    nvalid = 0;
    for (int s = 0; s < nops; s++) begin
      @(negedge clk);
      if (s == 0) t_first = cyc;
      vs1 = '0; vs2 = '0;
      for (int kl = 0; kl < kper; kl++) begin
        int kk;
        kk = s * kper + kl;
        if (kk < k)
          for (int i = 0; i < 4; i++) begin
            if (int4) begin
              vs1[4*(kl*4+i) +: 4] = 4'(A[i][kk]);
              vs2[4*(kl*4+i) +: 4] = 4'(B[kk][i]);
            end else begin
              vs1[8*(kl*4+i) +: 8] = 8'(A[i][kk]);
              vs2[8*(kl*4+i) +: 8] = 8'(B[kk][i]);
            end
          end
      end
      in_valid = 1; in_acc_init = (s == 0); in_mode = int4 ? MODE_INT4 : MODE_INT8;
      if (vd_valid) nvalid++;
    end
    @(negedge clk);
    in_valid = 0;
    // Wait for the last result.
    while (nvalid < nops) begin
      if (vd_valid) nvalid++;
      if (nvalid < nops) @(negedge clk);
    end
    t_done = cyc;
    checks++;
    if (t_done - t_first != longint'(nops - 1 + LAT)) begin
      failures++;
      $display("FAIL k=%0d int4=%0d: %0d ops took %0d cycles, expected %0d",
               k, int4, nops, t_done - t_first, nops - 1 + LAT);
    end
    for (int r = 0; r < 4; r++)
      for (int cc = 0; cc < 4; cc++) begin
        checks++;
        if (longint'($signed(vd[32*(cc*4+r) +: 32])) != c[r][cc]) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d int4=%0d C[%0d][%0d] got %0d exp %0d",
                                      k, int4, r, cc, $signed(vd[32*(cc*4+r) +: 32]), c[r][cc]);
        end
      end
    $display("k=%0d %s%s: %0d camp ops, %0d cycles", k, int4 ? "INT4" : "INT8",
             extreme ? " (all minimum)" : "", nops, t_done - t_first + 1);
    @(negedge clk);
  endtask

  // Complete m x n x k product, one 4x4 tile after another with no gap.
  int CA [64][64];
  int CB [64][64];
  int CC [64][64];
  int tile_at [longint];     // cycle -> tile number whose final result is due

  task automatic run_gemm(int mm, int nn, int k, bit int4);
    int kper, nops, lo, hi, ntiles, errs;
    longint t_first, t_last;
    kper = int4 ? 32 : 16;
    lo   = int4 ? -8 : -128;
    hi   = int4 ? 7 : 127;
    nops = (k + kper - 1) / kper;
    ntiles = (mm / 4) * (nn / 4);
    for (int i = 0; i < mm; i++)
      for (int kk = 0; kk < k; kk++) CA[i][kk] = lo + int'($urandom % (hi - lo + 1));
    for (int kk = 0; kk < k; kk++)
      for (int j = 0; j < nn; j++) CB[kk][j] = lo + int'($urandom % (hi - lo + 1));
    for (int ti = 0; ti < mm / 4; ti++)
      for (int tj = 0; tj < nn / 4; tj++)
        for (int s = 0; s < nops; s++) begin
          @(negedge clk);
          if (ti == 0 && tj == 0 && s == 0) t_first = cyc;
          vs1 = '0; vs2 = '0;
          for (int kl = 0; kl < kper; kl++) begin
            int kk;
            kk = s * kper + kl;
            if (kk < k)
              for (int i = 0; i < 4; i++) begin
                if (int4) begin
                  vs1[4*(kl*4+i) +: 4] = 4'(CA[ti*4+i][kk]);
                  vs2[4*(kl*4+i) +: 4] = 4'(CB[kk][tj*4+i]);
                end else begin
                  vs1[8*(kl*4+i) +: 8] = 8'(CA[ti*4+i][kk]);
                  vs2[8*(kl*4+i) +: 8] = 8'(CB[kk][tj*4+i]);
                end
              end
          end
          in_valid = 1; in_acc_init = (s == 0); in_mode = int4 ? MODE_INT4 : MODE_INT8;
          if (s == nops - 1) tile_at[cyc + LAT] = ti * 16 + tj;
        end
    t_last = cyc;
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 1) @(negedge clk);
    checks++;
    if (tile_at.size() != 0) begin
      failures++;
      $display("FAIL %0d tiles never produced a result", tile_at.size());
    end
    errs = 0;
    for (int i = 0; i < mm; i++)
      for (int j = 0; j < nn; j++) begin
        longint ref_c;
        ref_c = 0;
        for (int kk = 0; kk < k; kk++) ref_c += longint'(CA[i][kk]) * longint'(CB[kk][j]);
        checks++;
        if (longint'(CC[i][j]) != ref_c) begin
          failures++; errs++;
          if (errs < 5) $display("FAIL gemm %0dx%0dx%0d C[%0d][%0d] got %0d exp %0d",
                                 mm, nn, k, i, j, CC[i][j], ref_c);
        end
      end
    $display("gemm %0dx%0dx%0d %s: %0d tiles x %0d ops issued in %0d cycles, %0d errors",
             mm, nn, k, int4 ? "INT4" : "INT8", ntiles, nops, t_last - t_first + 1, errs);
  endtask

  // Capture the finished tiles of run_gemm.
  always @(negedge clk) begin
    if (tile_at.exists(cyc)) begin
      int ti, tj;
      ti = tile_at[cyc] / 16; tj = tile_at[cyc] % 16;
      if (!vd_valid) begin
        failures++;
        $display("FAIL tile %0d,%0d: no result at cycle %0d", ti, tj, cyc);
      end
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++)
          CC[ti*4+r][tj*4+c] = int'($signed(vd[32*(c*4+r) +: 32]));
      tile_at.delete(cyc);
    end
  end

  initial begin
    in_valid = 0; in_acc_init = 0; in_mode = MODE_INT8; vs1 = '0; vs2 = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    foreach (KS[i]) begin
      run_tile(KS[i], 0, 0);
      run_tile(KS[i], 1, 0);
    end
    run_tile(4608, 0, 1);
    run_tile(4608, 1, 1);
    run_gemm(32, 32, 32, 0);
    run_gemm(32, 32, 32, 1);
    run_gemm(64, 64, 64, 0);
    run_gemm(64, 64, 64, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
