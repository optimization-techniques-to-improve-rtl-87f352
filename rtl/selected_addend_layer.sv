// selected_addend_layer: the weight matrix of one fully connected layer with
// binary inputs. For every destination node j it forms
//     sum[j] = sum over i of w(i,j) * x[i],     x[i] in {0,1}
// without a multiplier: because x[i] is a single bit, the product is either 0
// or the constant w(i,j), so each input only selects whether its constant
// weight is added (a weight of 3 is the same as adding x[i] three times).
// Weights that are zero are skipped, so neither an adder nor a wire is left
// for them. Purely combinational.
//
// The weights are constants taken from nn_pkg::weight(SEED, LAYER, i, j);
// the same module serves the input->hidden layer (LAYER 0) and the
// hidden->output layer (LAYER 1). SUM_W defaults to the width that cannot
// overflow for N_IN inputs of weight magnitude at most W_MAX.
module selected_addend_layer #(
  parameter int unsigned N_IN  = nn_pkg::N_IN_DEF,
  parameter int unsigned N_OUT = nn_pkg::N_HID_DEF,
  parameter int unsigned LAYER = 0,
  parameter int unsigned SEED  = 1,
  parameter int          W_MAX = nn_pkg::W_MAX_DEF,
  parameter int unsigned SUM_W = nn_pkg::sum_width(N_IN, W_MAX)
) (
  input  logic        [N_IN-1:0]  x,
  output logic signed [SUM_W-1:0] sum [N_OUT]
);

  for (genvar j = 0; j < N_OUT; j++) begin : g_node
    always_comb begin
      automatic logic signed [SUM_W-1:0] acc = '0;
      for (int i = 0; i < N_IN; i++) begin
        automatic int w = nn_pkg::weight(SEED, LAYER, i, j, W_MAX);
        if (w != 0 && x[i]) acc += SUM_W'(w);
      end
      sum[j] = acc;
    end
  end

endmodule
