// camp_inter_lane_acc -- inter-lane accumulator and auxiliary register.
//
// For every output index t (16 of them, column-major 4x4 tile) one adder sums
// lane_sum[l][t] over all NLANES lanes and adds the total into the 32-bit
// auxiliary register entry aux[t]. An operation with acc_init set loads the
// total instead of adding it, starting a new result tile; later operations of
// the same tile accumulate, so the tile stays in the auxiliary register for
// the whole k loop and needs no load or store in between. Arithmetic wraps
// at 32 bits.
//
// Timing: aux is updated on the clock edge after in_op.valid, and aux_valid
// is high for that one cycle. The auxiliary register is cleared by reset.
//
// The 16 index-wise adders across lanes and the auxiliary register follow
// the architecture; the acc_init control and the wrap-around are this
// implementation's choices.
module camp_inter_lane_acc
  import camp_pkg::*;
#(
  parameter int NLANES = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  camp_op_t                      in_op,
  input  lsum_t [NLANES-1:0][NOUT-1:0]  lane_sum,
  output acc_t  [NOUT-1:0]              aux,
  output logic                          aux_valid
);
  acc_t [NOUT-1:0] total;

  always_comb begin
    for (int t = 0; t < NOUT; t++) begin
      total[t] = '0;
      for (int l = 0; l < NLANES; l++)
        total[t] += ACC_W'(lane_sum[l][t]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aux       <= '0;
      aux_valid <= 1'b0;
    end else begin
      aux_valid <= in_op.valid;
      if (in_op.valid) begin
        for (int t = 0; t < NOUT; t++)
          aux[t] <= in_op.acc_init ? total[t] : aux[t] + total[t];
      end
    end
  end
endmodule
