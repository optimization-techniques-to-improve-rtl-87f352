// nn_pkg: sizes, sum widths and the weight matrices shared by the
// binarized feed-forward classifier.
//
// The network is a 784-500-10 fully connected classifier whose weights are
// integers strictly between -10 and +10. In the hardware the weights are not
// stored anywhere: they are constants folded into the adder logic of every
// node. The trained weight values of the original network are not published,
// so this package defines a deterministic stand-in weight set: a 32-bit
// integer hash of (seed, layer, source node, destination node) mapped to
// -9..+9, with about half of the weights zero (weights that truncate to zero
// are common when real-valued weights are cast to integers). To load a trained
// network, replace the body of weight() with a lookup of the trained values;
// every module and testbench takes its weights from this one function.
//
// Layer numbering: layer 0 is the input->hidden matrix (w[i][j], i an input
// pixel, j a hidden node); layer 1 is the hidden->output matrix.
package nn_pkg;

  // Network shape of the main configuration.
  localparam int unsigned N_IN_DEF  = 784;  // 28x28 pixels
  localparam int unsigned N_HID_DEF = 500;  // hidden nodes
  localparam int unsigned N_OUT_DEF = 10;   // digit classes 0..9
  localparam int unsigned PIX_W_DEF = 8;    // bits per pixel
  localparam int unsigned THRESHOLD_DEF = 128; // pixel binarization cut-off

  // Weights lie in -W_MAX..+W_MAX ("-10 < weights < 10").
  localparam int W_MAX_DEF = 9;

  // Bits of a signed node sum that cannot overflow: n inputs, each adding at
  // most wmax in magnitude. For the 3-input example (n=3, wmax=9) this is 6,
  // the width of the hi/fi wires of the small reference network.
  function automatic int sum_width(input int n, input int wmax);
    return $clog2(n * wmax + 1) + 1;
  endfunction

  // 32-bit avalanche mix (xor-shift / multiply).
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb_352d;
    h = h ^ (h >> 15);
    h = h * 32'h846c_a68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Integer weight from source node i to destination node j of a layer.
  // Result lies in -wmax..+wmax; roughly half of the results are zero.
  function automatic int weight(input int unsigned seed, input int unsigned layer,
                                input int unsigned i, input int unsigned j,
                                input int wmax);
    logic [31:0] h;
    int unsigned r;
    h = mix32(seed ^ mix32((layer << 28) ^ (i << 12) ^ j ^ mix32(i)));
    r = int'(h % 32'd64);
    if (r < 32) return 0;                       // zero weight: pruned
    return int'((h >> 8) % (2 * wmax + 1)) - wmax;
  endfunction

endpackage
