// tb_camp_lane -- one lane fed with a random stream of operations (both
// modes, random acc_init, idle cycles between some). Each issued op must
// appear on out_op exactly 3 cycles later with its mode and acc_init, and
// out_sum must equal the lane's share of the matrix product; idle cycles must
// come out as idle.
module tb_camp_lane;
  import camp_pkg::*;
  import camp_tb_pkg::*;
  localparam int LAT = 3;

  logic clk = 0, rst_n = 0;
  camp_op_t         in_op;
  logic [63:0]      in_a, in_b;
  camp_op_t         out_op;
  lsum_t [NOUT-1:0] out_sum;
  int checks = 0, failures = 0;

  camp_lane dut (.clk(clk), .rst_n(rst_n), .in_op(in_op), .in_a(in_a), .in_b(in_b),
                 .out_op(out_op), .out_sum(out_sum));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected output per cycle, indexed by the cycle it must appear in.
  typedef struct { bit valid; bit int4; bit init; tile_t sum; } exp_t;
  exp_t exp_q [int];
  int cyc = 0;

  initial begin
    in_op = '0; in_a = '0; in_b = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      logic [511:0] va, vb;
      exp_t e;
      @(negedge clk);
      va = rand_vec(); vb = rand_vec();
      e.valid = ($urandom % 4) != 0;
      e.int4  = $urandom % 2;
      e.init  = $urandom % 2;
      e.sum   = ref_tile(va, vb, e.int4, 0, e.int4 ? 4 : 2);
      in_op.valid    = e.valid;
      in_op.mode     = e.int4 ? MODE_INT4 : MODE_INT8;
      in_op.acc_init = e.init;
      in_a = va[63:0]; in_b = vb[63:0];
      exp_q[cyc + LAT] = e;
    end
    @(negedge clk);
    in_op = '0;
    repeat (LAT + 2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cyc counts rising edges after reset; an op driven while cyc == C is
  // latched at edge C+1 and its result is visible once cyc == C+LAT.
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (rst_n && exp_q.exists(cyc)) begin
      exp_t e;
      e = exp_q[cyc];
      checks++;
      if (out_op.valid != e.valid) begin
        failures++;
        $display("FAIL cycle %0d valid %0d exp %0d", cyc, out_op.valid, e.valid);
      end else if (e.valid) begin
        checks++;
        if (out_op.mode != (e.int4 ? MODE_INT4 : MODE_INT8) || out_op.acc_init != e.init) begin
          failures++;
          $display("FAIL cycle %0d control", cyc);
        end
        for (int t = 0; t < 16; t++) begin
          checks++;
          if (int'(out_sum[t]) != e.sum[t]) begin
            failures++;
            if (failures < 10) $display("FAIL cycle %0d t%0d got %0d exp %0d", cyc, t, out_sum[t], e.sum[t]);
          end
        end
      end
    end
  end
endmodule
