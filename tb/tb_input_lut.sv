// tb_input_lut: self-checking test of input_lut. At the default size
// (784 8-bit pixels, cut-off 128) it applies random images and images made of
// the boundary values 0, 127, 128, 129 and 255, and compares every output bit
// with an integer comparison pixel >= 128 done in the testbench. A second
// instance with a cut-off of 100 checks that the comparison follows the
// parameter. Combinational: outputs are sampled 1 ns after each change.
module tb_input_lut;
  localparam int unsigned N_IN  = nn_pkg::N_IN_DEF;
  localparam int unsigned PIX_W = nn_pkg::PIX_W_DEF;

  logic [N_IN-1:0][PIX_W-1:0] pixel;
  logic [N_IN-1:0] bin, bin100;
  int checks = 0, failures = 0;

  input_lut dut (.pixel, .bin);
  input_lut #(.THRESHOLD(100)) dut100 (.pixel, .bin(bin100));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    #1;
    for (int i = 0; i < N_IN; i++) begin
      int v = int'(pixel[i]);
      checks++;
      if (bin[i] !== (v >= 128) || bin100[i] !== (v >= 100)) begin
        failures++;
        if (failures < 10) $display("FAIL pixel %0d = %0d: bin=%0b bin100=%0b", i, v, bin[i], bin100[i]);
      end
    end
  endtask

  initial begin
    automatic int edge_vals[6] = '{0, 99, 127, 128, 129, 255};
    for (int e = 0; e < 6; e++) begin
      for (int i = 0; i < N_IN; i++) pixel[i] = PIX_W'(edge_vals[(i + e) % 6]);
      check_all();
    end
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < N_IN; i++) pixel[i] = PIX_W'($urandom);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
