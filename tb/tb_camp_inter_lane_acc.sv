// tb_camp_inter_lane_acc -- random lane sums and a random pattern of
// load (acc_init), accumulate and idle cycles, including sums near the
// 18-bit limits so that the 32-bit accumulator wraps. After every clock the
// auxiliary register must equal a model that sums the 8 lanes per index.
module tb_camp_inter_lane_acc;
  import camp_pkg::*;
  localparam int NL = 8;

  logic clk = 0, rst_n = 0;
  camp_op_t                  in_op;
  lsum_t [NL-1:0][NOUT-1:0]  lane_sum;
  acc_t  [NOUT-1:0]          aux;
  logic                      aux_valid;
  int checks = 0, failures = 0;
  int wraps = 0;
  longint model [NOUT];

  camp_inter_lane_acc dut (.clk(clk), .rst_n(rst_n), .in_op(in_op),
                                          .lane_sum(lane_sum), .aux(aux), .aux_valid(aux_valid));

  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_op = '0; lane_sum = '0;
    foreach (model[t]) model[t] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      longint tot [NOUT];
      bit big;
      big = (n >= 1000);   // later ops: one long tile of near-maximum sums wraps 32 bits
      in_op.valid    = ($urandom % 5) != 0;
      in_op.mode     = camp_mode_e'($urandom % 2);
      in_op.acc_init = (n == 0) || (!big && (($urandom % 16) == 0));
      for (int t = 0; t < NOUT; t++) begin
        tot[t] = 0;
        for (int l = 0; l < NL; l++) begin
          int v;
          v = big ? 131071 - int'($urandom % 4) : int'($urandom % 65536) - 32768;
          lane_sum[l][t] = lsum_t'(v);
          tot[t] += v;
        end
      end
      @(posedge clk);
      #1;
      if (in_op.valid)
        for (int t = 0; t < NOUT; t++) begin
          longint nv;
          nv = in_op.acc_init ? tot[t] : model[t] + tot[t];
          if (nv > 64'sd2147483647 || nv < -64'sd2147483648) wraps++;
          model[t] = longint'(int'(nv));
        end
      checks++;
      if (aux_valid != in_op.valid) begin
        failures++;
        $display("FAIL aux_valid at op %0d", n);
      end
      for (int t = 0; t < NOUT; t++) begin
        checks++;
        if (longint'(aux[t]) != model[t]) begin
          failures++;
          if (failures < 10) $display("FAIL op %0d t%0d got %0d exp %0d", n, t, aux[t], model[t]);
        end
      end
      @(negedge clk);
    end
    checks++;
    if (wraps == 0) begin
      failures++;
      $display("FAIL the accumulator never wrapped");
    end
    $display("accumulator wrap-arounds: %0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
