// ff_nn_top: a complete binarized feed-forward classifier for 28x28 images of
// hand-written digits (784 inputs, 500 hidden nodes, 10 output classes).
//
// Structure, left to right:
//   input_register        clocked capture of one 784 x 8-bit image
//   input_lut             pixel -> 0/1 (pixel MSB, i.e. pixel >= 128)
//   selected_addend_layer hidden inputs hi[j] = sum of w(i,j) over set pixels
//   step_activation       hidden outputs ho[j] = ~sign(hi[j])
//   selected_addend_layer final inputs fi[k] = sum of w(j,k) over set ho[j]
//   prediction_lut        class of the largest fi (ties to the higher class)
// Everything after the input register is combinational: there is no state and
// no clock, and the answer settles one logic propagation delay after the
// register changes. With `in_valid` high, the image on `pixels` is captured at
// the clock edge; `out_valid` is high during the following cycle, when
// `prediction`, `pred_class` and `final_in` show the result for that image.
// Driving a new image every cycle gives one prediction per clock.
//
// The chain of blocks, the binarized inputs and activations, the integer
// weights applied by selected addends with zero weights removed, and the
// 784/500/10 shape follow the design. The weight values are a stand-in set
// (see nn_pkg), the valid handshake and the reset are this design's own.
module ff_nn_top #(
  parameter int unsigned N_IN      = nn_pkg::N_IN_DEF,
  parameter int unsigned N_HID     = nn_pkg::N_HID_DEF,
  parameter int unsigned N_OUT     = nn_pkg::N_OUT_DEF,
  parameter int unsigned PIX_W     = nn_pkg::PIX_W_DEF,
  parameter int unsigned THRESHOLD = nn_pkg::THRESHOLD_DEF,
  parameter int          W_MAX     = nn_pkg::W_MAX_DEF,
  parameter int unsigned SEED      = 1,
  localparam int unsigned HI_W  = nn_pkg::sum_width(N_IN, W_MAX),
  localparam int unsigned FI_W  = nn_pkg::sum_width(N_HID, W_MAX),
  localparam int unsigned IDX_W = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [N_IN-1:0][PIX_W-1:0]  pixels,
  output logic                        out_valid,
  output logic [N_OUT-1:0]            prediction,
  output logic [IDX_W-1:0]            pred_class,
  output logic signed [FI_W-1:0]      final_in [N_OUT]
);

  logic [N_IN-1:0][PIX_W-1:0] pix_q;
  logic [N_IN-1:0]            in_bin;
  logic signed [HI_W-1:0]     hi [N_HID];
  logic [N_HID-1:0]           ho;

  input_register #(.N_IN(N_IN), .PIX_W(PIX_W)) u_in_reg (
    .clk, .rst_n, .load(in_valid), .d(pixels), .q(pix_q), .q_valid(out_valid)
  );

  input_lut #(.N_IN(N_IN), .PIX_W(PIX_W), .THRESHOLD(THRESHOLD)) u_in_lut (
    .pixel(pix_q), .bin(in_bin)
  );

  selected_addend_layer #(
    .N_IN(N_IN), .N_OUT(N_HID), .LAYER(0), .SEED(SEED), .W_MAX(W_MAX), .SUM_W(HI_W)
  ) u_hidden_in (
    .x(in_bin), .sum(hi)
  );

  step_activation #(.N(N_HID), .SUM_W(HI_W)) u_hidden_out (
    .sum(hi), .act(ho)
  );

  selected_addend_layer #(
    .N_IN(N_HID), .N_OUT(N_OUT), .LAYER(1), .SEED(SEED), .W_MAX(W_MAX), .SUM_W(FI_W)
  ) u_final_in (
    .x(ho), .sum(final_in)
  );

  prediction_lut #(.N(N_OUT), .SUM_W(FI_W)) u_pred (
    .fi(final_in), .prediction, .pred_class
  );

endmodule
