// step_activation: the step activation of a layer of nodes,
// act[j] = 1 when the signed node sum is non-negative, else 0.
// Purely combinational.
//
// The design replaces the sigmoid by a step at zero and then reduces the
// step to the sign bit of the two's-complement sum: MSB = 1 (negative)
// gives 0, MSB = 0 gives 1, so each node needs one inverter. A sum of exactly
// zero gives 1, as the inverter rule implies.
module step_activation #(
  parameter int unsigned N     = nn_pkg::N_HID_DEF,
  parameter int unsigned SUM_W = nn_pkg::sum_width(nn_pkg::N_IN_DEF, nn_pkg::W_MAX_DEF)
) (
  input  logic signed [SUM_W-1:0] sum [N],
  output logic        [N-1:0]     act
);

  always_comb begin
    for (int j = 0; j < N; j++)
      act[j] = ~sum[j][SUM_W-1];
  end

endmodule
