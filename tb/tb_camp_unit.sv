// tb_camp_unit -- end-to-end test of the CAMP unit at its default size
// (512-bit registers, 8 lanes).
//
// Issues a random stream of result tiles. Each tile starts with an
// acc_init op followed by accumulating ops; ops of a tile use random modes,
// so INT8 and INT4 ops and mode switches occur inside and between tiles, and
// ops are issued back to back or with idle cycles between them. Every op must
// produce vd_valid exactly 4 cycles after issue with vd equal to the
// reference C = sum of A*B over the tile's ops (32-bit wrap); idle cycles must
// produce no vd_valid. A final long tile of all -128 operands runs the 32-bit
// accumulator past its range. Each mechanism is counted and a failure is
// recorded for any that never happened.
module tb_camp_unit;
  import camp_pkg::*;
  import camp_tb_pkg::*;
  localparam int LAT = 4;

  logic clk = 0, rst_n = 0;
  logic         in_valid, in_acc_init;
  camp_mode_e   in_mode;
  logic [511:0] vs1, vs2, vd;
  logic         vd_valid;
  int checks = 0, failures = 0;

  camp_unit dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_mode(in_mode),
                 .in_acc_init(in_acc_init), .vs1(vs1), .vs2(vs2),
                 .vd_valid(vd_valid), .vd(vd));

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { bit valid; tile_t c; } exp_t;
  exp_t exp_q [int];
  int cyc = 0;
  tile_t acc;
  int n_int8 = 0, n_int4 = 0, n_switch = 0, n_init = 0, n_accum = 0;
  int n_b2b = 0, n_idle = 0, n_wrap = 0;
  bit last_valid = 0;
  camp_mode_e last_mode = MODE_INT8;
  bit have_last = 0;

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  task automatic issue(logic [511:0] a, logic [511:0] b, bit int4, bit init);
    tile_t p;
    exp_t  e;
    @(negedge clk);
    p = ref_tile(a, b, int4, 0, int4 ? 32 : 16);
    for (int t = 0; t < 16; t++) begin
      longint s;
      s = init ? longint'(p[t]) : longint'(acc[t]) + longint'(p[t]);
      if (s > 64'sd2147483647 || s < -64'sd2147483648) n_wrap++;
      acc[t] = int'(s);
    end
    in_valid = 1; in_acc_init = init; in_mode = int4 ? MODE_INT4 : MODE_INT8;
    vs1 = a; vs2 = b;
    if (int4) n_int4++; else n_int8++;
    if (init) n_init++; else n_accum++;
    if (have_last && last_mode != in_mode) n_switch++;
    if (last_valid) n_b2b++;
    last_mode = in_mode; have_last = 1; last_valid = 1;
    e.valid = 1; e.c = acc;
    exp_q[cyc + LAT] = e;
  endtask

  task automatic idle();
    exp_t e;
    @(negedge clk);
    in_valid = 0; in_acc_init = $urandom % 2; in_mode = camp_mode_e'($urandom % 2);
    vs1 = rand_vec(); vs2 = rand_vec();
    n_idle++; last_valid = 0;
    e.valid = 0;
    exp_q[cyc + LAT] = e;
  endtask

  always @(negedge clk) begin
    if (rst_n && exp_q.exists(cyc)) begin
      exp_t e;
      e = exp_q[cyc];
      checks++;
      if (vd_valid != e.valid) begin
        failures++;
        $display("FAIL cycle %0d vd_valid=%0d exp %0d", cyc, vd_valid, e.valid);
      end else if (e.valid) begin
        for (int t = 0; t < 16; t++) begin
          checks++;
          if (int'(vd[32*t +: 32]) != e.c[t]) begin
            failures++;
            if (failures < 10) $display("FAIL cycle %0d elem %0d got %0d exp %0d",
                                        cyc, t, int'(vd[32*t +: 32]), e.c[t]);
          end
        end
      end
      exp_q.delete(cyc);
    end
  end

  task automatic check_seen(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    in_valid = 0; in_acc_init = 0; in_mode = MODE_INT8; vs1 = '0; vs2 = '0;
    for (int t = 0; t < 16; t++) acc[t] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // Random tiles.
    for (int tile = 0; tile < 60; tile++) begin
      int nops;
      nops = 1 + $urandom % 6;
      for (int k = 0; k < nops; k++) begin
        logic [511:0] a, b;
        a = rand_vec(); b = rand_vec();
        if (tile == 3) begin a = {64{8'h80}}; b = {64{8'h80}}; end
        if (tile == 4) begin a = {128{4'h8}}; b = {128{4'h8}}; end
        issue(a, b, tile == 4 ? 1'b1 : tile == 3 ? 1'b0 : 1'($urandom % 2), k == 0);
        if ($urandom % 3 == 0) idle();
      end
    end
    // Long INT8 tile of -128 * -128: 16 * 16384 per op, wraps after 8192 ops.
    for (int k = 0; k < 8300; k++)
      issue({64{8'h80}}, {64{8'h80}}, 0, k == 0);
    idle();
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d expected results never checked", exp_q.size());
    end
    $display("mechanisms:");
    check_seen("INT8 operations", n_int8);
    check_seen("INT4 operations", n_int4);
    check_seen("mode switches", n_switch);
    check_seen("tile starts (acc_init)", n_init);
    check_seen("accumulating operations", n_accum);
    check_seen("back-to-back issues", n_b2b);
    check_seen("idle cycles", n_idle);
    check_seen("32-bit accumulator wraps", n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
