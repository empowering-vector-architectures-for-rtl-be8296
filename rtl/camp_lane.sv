// camp_lane -- the CAMP path of one vector lane.
//
// Three register stages, one operation accepted per cycle, no stalls:
//   stage 1  opcode and the lane's 64-bit A and B slices are registered;
//   stage 2  the opcode is decoded into the multiplier mode and the
//            accumulate control while the operands pass unchanged, and both
//            are registered again;
//   stage 3  the ALU -- 32 hybrid multipliers (camp_outer_product) followed
//            by the 16 intra-lane adders -- computes the lane's partial 4x4
//            tile, which is registered in the 16 lane result registers.
// out_op / out_sum are valid 3 cycles after in_op / in_a / in_b.
//
// The two register bars with a decode box between them, the ALU with the
// hybrid multiplier and the 16 per-lane result registers follow the lane
// drawing of the architecture; the number of stages is this implementation's
// choice. The control registers are reset; data registers are not.
module camp_lane
  import camp_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  camp_op_t              in_op,
  input  logic [LANE_W-1:0]     in_a,
  input  logic [LANE_W-1:0]     in_b,
  output camp_op_t              out_op,
  output lsum_t [NOUT-1:0]      out_sum
);
  // Stage 1: operand / opcode latch.
  camp_op_t          s1_op;
  logic [LANE_W-1:0] s1_a, s1_b;
  // Stage 2: decoded control, operands.
  camp_op_t          s2_op;
  logic [LANE_W-1:0] s2_a, s2_b;
  camp_op_t          dec_op;

  p8_t   [NMUL-1:0]      p8;
  p4_t   [NMUL-1:0][3:0] p4;
  lsum_t [NOUT-1:0]      sum;

  // Control path (reset): opcode latch, decoded control, result control.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_op  <= '0;
      s2_op  <= '0;
      out_op <= '0;
    end else begin
      s1_op  <= in_op;
      s2_op  <= dec_op;
      out_op <= s2_op;
    end
  end

  // Data path (no reset).
  always_ff @(posedge clk) begin
    s1_a    <= in_a;
    s1_b    <= in_b;
    s2_a    <= s1_a;
    s2_b    <= s1_b;
    out_sum <= sum;
  end

  // Decode: an idle slot carries no accumulate request, so a bubble can never
  // disturb the auxiliary register downstream.
  always_comb begin
    dec_op          = s1_op;
    dec_op.acc_init = s1_op.valid & s1_op.acc_init;
  end

  camp_outer_product u_op (
    .mode(s2_op.mode),
    .a   (s2_a),
    .b   (s2_b),
    .p8  (p8),
    .p4  (p4)
  );

  camp_intra_lane_adders u_add (
    .mode(s2_op.mode),
    .p8  (p8),
    .p4  (p4),
    .sum (sum)
  );
endmodule
