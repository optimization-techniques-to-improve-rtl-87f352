// prediction_lut: picks the output node with the largest final input value.
// `prediction` is one-hot (bit k set for class k) and `pred_class` the class
// number. Purely combinational.
//
// Ties go to the higher-numbered node. This reproduces the priority of the
// three-output reference expression
//   (fi1 > fi2 && fi1 > fi3) ? 1 : (fi2 > fi3) ? 2 : 3
// which selects the first node that is strictly larger than every later node;
// that node is always the last one holding the maximum. Here it is built as a
// running comparison from node 0 upwards with ">=".
module prediction_lut #(
  parameter int unsigned N     = nn_pkg::N_OUT_DEF,
  parameter int unsigned SUM_W = nn_pkg::sum_width(nn_pkg::N_HID_DEF, nn_pkg::W_MAX_DEF),
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic signed [SUM_W-1:0] fi [N],
  output logic        [N-1:0]     prediction,
  output logic        [IDX_W-1:0] pred_class
);

  always_comb begin
    automatic logic signed [SUM_W-1:0] best = fi[0];
    pred_class = '0;
    for (int k = 1; k < N; k++) begin
      if (fi[k] >= best) begin
        best       = fi[k];
        pred_class = IDX_W'(k);
      end
    end
    prediction = '0;
    prediction[pred_class] = 1'b1;
  end

endmodule
