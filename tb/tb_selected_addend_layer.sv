// tb_selected_addend_layer: self-checking test of selected_addend_layer.
// The expected sums are computed in the testbench as a plain
// multiply-and-accumulate, sum_i w(i,j) * x[i], with the weights of
// nn_pkg::weight(); the layer itself never multiplies.
// 1. Three inputs, three nodes: all 8 input patterns; the sum width must be
//    6 bits, as in the 3-input reference network.
// 2. 64 inputs, 16 nodes (layer 1): one-hot inputs, where each sum must equal
//    a single weight, plus all-zero, all-one and random inputs.
// 3. Default size (784 x 500, layer 0): a few random images.
// It also counts the zero (pruned) and non-zero weights of the default layer
// and requires both to occur.
module tb_selected_addend_layer;
  localparam int unsigned SEED = 1;
  localparam int W_MAX = nn_pkg::W_MAX_DEF;
  localparam int unsigned NA_I = 3, NA_O = 3, WA = nn_pkg::sum_width(3, W_MAX);
  localparam int unsigned NB_I = 64, NB_O = 16, WB = nn_pkg::sum_width(64, W_MAX);
  localparam int unsigned NC_I = nn_pkg::N_IN_DEF, NC_O = nn_pkg::N_HID_DEF;
  localparam int unsigned WC = nn_pkg::sum_width(NC_I, W_MAX);

  logic [NA_I-1:0] xa; logic signed [WA-1:0] sa [NA_O];
  logic [NB_I-1:0] xb; logic signed [WB-1:0] sb [NB_O];
  logic [NC_I-1:0] xc; logic signed [WC-1:0] sc [NC_O];
  int checks = 0, failures = 0;

  selected_addend_layer #(.N_IN(NA_I), .N_OUT(NA_O), .LAYER(0), .SEED(SEED)) dut_a (.x(xa), .sum(sa));
  selected_addend_layer #(.N_IN(NB_I), .N_OUT(NB_O), .LAYER(1), .SEED(SEED)) dut_b (.x(xb), .sum(sb));
  selected_addend_layer dut_c (.x(xc), .sum(sc));

  function automatic int ref_sum(int unsigned layer, int n_in, int j, logic [1023:0] x);
    int s = 0;
    for (int i = 0; i < n_in; i++) s += nn_pkg::weight(SEED, layer, i, j, W_MAX) * int'(x[i]);
    return s;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int zeros = 0, nonzeros = 0;
    checks++;
    if (WA != 6) begin failures++; $display("FAIL 3-input sum width %0d", WA); end
    for (int p = 0; p < 8; p++) begin
      xa = 3'(p); #1;
      for (int j = 0; j < NA_O; j++) begin
        checks++;
        if (int'(sa[j]) != ref_sum(0, NA_I, j, 1024'(xa))) begin
          failures++; $display("FAIL 3x3 x=%b node %0d sum %0d", xa, j, sa[j]);
        end
      end
    end
    for (int t = 0; t < NB_I + 40; t++) begin
      if (t < NB_I) xb = NB_I'(1) << t;
      else if (t == NB_I) xb = '0;
      else if (t == NB_I + 1) xb = '1;
      else xb = {$urandom, $urandom};
      #1;
      for (int j = 0; j < NB_O; j++) begin
        checks++;
        if (int'(sb[j]) != ref_sum(1, NB_I, j, 1024'(xb))) begin
          failures++;
          if (failures < 10) $display("FAIL 64x16 t=%0d node %0d sum %0d exp %0d", t, j, sb[j], ref_sum(1, NB_I, j, 1024'(xb)));
        end
      end
    end
    for (int t = 0; t < 3; t++) begin
      for (int i = 0; i < NC_I; i++) xc[i] = 1'($urandom % 2);
      #1;
      for (int j = 0; j < NC_O; j++) begin
        automatic int s = 0;
        for (int i = 0; i < NC_I; i++) s += nn_pkg::weight(SEED, 0, i, j, W_MAX) * int'(xc[i]);
        checks++;
        if (int'(sc[j]) != s) begin
          failures++;
          if (failures < 10) $display("FAIL 784x500 node %0d sum %0d exp %0d", j, sc[j], s);
        end
      end
    end
    for (int j = 0; j < NC_O; j++)
      for (int i = 0; i < NC_I; i++) begin
        automatic int w = nn_pkg::weight(SEED, 0, i, j, W_MAX);
        if (w == 0) zeros++; else nonzeros++;
        if (w > W_MAX || w < -W_MAX) failures++;
      end
    $display("weights: %0d zero (pruned), %0d non-zero", zeros, nonzeros);
    checks++;
    if (zeros == 0 || nonzeros == 0) begin failures++; $display("FAIL pruning mix"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
