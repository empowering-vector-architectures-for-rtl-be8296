// camp_unit -- CAMP matrix-multiply functional unit (top level).
//
// Executes camp(VR0, VR1, VR2, mode). VR1 (vs1) holds A, a 4x16 tile of
// 8-bit or a 4x32 tile of 4-bit elements in column-major order; VR2 (vs2)
// holds B, 16x4 or 32x4, in row-major order. The register is cut into
// NLANES 64-bit slices, slice l going to lane l, so lane l sees columns/rows
// k = 2l, 2l+1 (INT8) or 4l..4l+3 (INT4). Each lane forms its outer products
// and intra-lane sums; the inter-lane accumulator adds the 16 sums of all
// lanes into the auxiliary register, which holds the 4x4 tile of 32-bit
// results C += A*B, element (r,c) at vd[32*(c*4+r) +: 32].
//
// Interface: in_valid issues one operation per cycle with no back-pressure;
// in_acc_init marks the first operation of a tile (C = A*B instead of
// C += A*B). vd_valid pulses 4 cycles after in_valid (3 lane stages plus the
// accumulator), and vd then shows the auxiliary register including that
// operation. Back-to-back operations of one tile need no stall because the
// accumulation is a single-cycle read-modify-write of the auxiliary register.
//
// The 512-bit register, 8 lanes of 64 bits, 32 hybrid multipliers and 16
// intra-lane adders per lane, 16 inter-lane accumulators and the auxiliary
// register follow the architecture. The issue handshake, acc_init and the
// pipeline depth are this implementation's choices.
module camp_unit
  import camp_pkg::*;
#(
  parameter int NLANES = 8,
  parameter int VLEN   = NLANES * LANE_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  camp_mode_e      in_mode,
  input  logic            in_acc_init,
  input  logic [VLEN-1:0] vs1,
  input  logic [VLEN-1:0] vs2,
  output logic            vd_valid,
  output logic [VLEN-1:0] vd
);
  camp_op_t                     in_op;
  camp_op_t [NLANES-1:0]        lane_op;
  lsum_t [NLANES-1:0][NOUT-1:0] lane_sum;
  acc_t  [NOUT-1:0]             aux;

  assign in_op = '{valid: in_valid, mode: in_mode, acc_init: in_acc_init};

  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    camp_lane u_lane (
      .clk    (clk),
      .rst_n  (rst_n),
      .in_op  (in_op),
      .in_a   (vs1[LANE_W*l +: LANE_W]),
      .in_b   (vs2[LANE_W*l +: LANE_W]),
      .out_op (lane_op[l]),
      .out_sum(lane_sum[l])
    );
  end

  // All lanes run in lockstep; lane 0 carries the control to the accumulator.
  camp_inter_lane_acc #(.NLANES(NLANES)) u_acc (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_op    (lane_op[0]),
    .lane_sum (lane_sum),
    .aux      (aux),
    .aux_valid(vd_valid)
  );

  // The result register is 512 bits (16 x 32); with fewer lanes it is wider
  // than the operand registers and is truncated, with more it is zero-extended.
  always_comb begin
    vd = '0;
    for (int t = 0; t < NOUT; t++)
      if (ACC_W*t < VLEN) vd[ACC_W*t +: ACC_W] = aux[t];
  end

  initial begin
    assert (VLEN == NLANES * LANE_W)
      else $error("camp_unit: VLEN must be NLANES * %0d", LANE_W);
  end

  // Issue-to-result latency is fixed at 4 cycles, with no result for an idle slot.
  a_result_latency: assert property (@(posedge clk) disable iff (!rst_n)
                                     in_valid |-> ##4 vd_valid);
  a_no_spurious:    assert property (@(posedge clk) disable iff (!rst_n)
                                     !in_valid |-> ##4 !vd_valid);

  // Lanes are in lockstep: every lane's op must agree with lane 0.
  for (genvar l = 1; l < NLANES; l++) begin : g_chk
    a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                                 lane_op[l] == lane_op[0]);
  end
endmodule
