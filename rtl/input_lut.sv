// input_lut: binarizes every pixel of the image, out[i] = 1 when pixel i is
// at least THRESHOLD, else 0. Purely combinational, no clock.
//
// The network replaces its 0..1 input scaling by a 0/1 step against a cut-off
// of 128. With 8-bit pixels and THRESHOLD = 128 the comparison is exactly the
// pixel's most significant bit, which is how the optimized design builds it:
// the comparator disappears and the MSB wire feeds the hidden layer directly.
// Pixel value 128 therefore gives 1 (the MSB rule); a strict "> 128" compare,
// which the unoptimized design used, would give 0 for it.
module input_lut #(
  parameter int unsigned N_IN      = nn_pkg::N_IN_DEF,
  parameter int unsigned PIX_W     = nn_pkg::PIX_W_DEF,
  parameter int unsigned THRESHOLD = nn_pkg::THRESHOLD_DEF
) (
  input  logic [N_IN-1:0][PIX_W-1:0] pixel,
  output logic [N_IN-1:0]            bin
);

  always_comb begin
    for (int i = 0; i < N_IN; i++)
      bin[i] = (pixel[i] >= PIX_W'(THRESHOLD));
  end

endmodule
