// tb_ff_nn_3x3: the classifier built at the size of the small worked example
// of the design, three inputs, three hidden nodes and three outputs. Its node
// sums must then be 6 bits wide. Every image whose three pixels are drawn
// from {0, 127, 128, 255} (64 images) is clocked in and the result compared
// with the software reference and, for the class, with the priority
// expression of the example,
//   (fi1 > fi2 && fi1 > fi3) ? 1 : (fi2 > fi3) ? 2 : 3   (classes 1..3).
module tb_ff_nn_3x3;
  localparam int unsigned SEED = 1;
  localparam int W_MAX = nn_pkg::W_MAX_DEF;
  localparam int unsigned FI_W = nn_pkg::sum_width(3, W_MAX);

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [2:0][7:0] pixels;
  logic [2:0] prediction;
  logic [1:0] pred_class;
  logic signed [FI_W-1:0] final_in [3];
  int checks = 0, failures = 0;

  ff_nn_top #(.N_IN(3), .N_HID(3), .N_OUT(3), .SEED(SEED)) dut (
    .clk, .rst_n, .in_valid, .pixels, .out_valid, .prediction, .pred_class, .final_in);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int vals[4] = '{0, 127, 128, 255};
    checks++;
    if (FI_W != 6 || $bits(dut.hi[0]) != 6) begin failures++; $display("FAIL sum width"); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 4; a++)
      for (int b = 0; b < 4; b++)
        for (int c = 0; c < 4; c++) begin
          automatic int p[] = new[3];
          automatic nn_ref_pkg::result_t r;
          int f1, f2, f3, ex;
          p[0] = vals[a]; p[1] = vals[b]; p[2] = vals[c];
          pixels[0] = 8'(p[0]); pixels[1] = 8'(p[1]); pixels[2] = 8'(p[2]);
          in_valid = 1;
          r = nn_ref_pkg::run(p, 3, 3, 128, SEED, W_MAX);
          @(posedge clk); #1;
          f1 = r.fi[0]; f2 = r.fi[1]; f3 = r.fi[2];
          ex = (f1 > f2 && f1 > f3) ? 1 : (f2 > f3) ? 2 : 3;
          checks++;
          if (!out_valid || int'(final_in[0]) != f1 || int'(final_in[1]) != f2 || int'(final_in[2]) != f3) begin
            failures++;
            $display("FAIL image %0d %0d %0d: fi %0d %0d %0d expected %0d %0d %0d", p[0], p[1], p[2],
                     final_in[0], final_in[1], final_in[2], f1, f2, f3);
          end
          checks++;
          if (int'(pred_class) + 1 != ex || prediction != (3'(1) << (ex - 1))) begin
            failures++;
            $display("FAIL image %0d %0d %0d: class %0d expected %0d", p[0], p[1], p[2], pred_class + 1, ex);
          end
          for (int j = 0; j < 3; j++) begin
            checks++;
            if (int'(dut.hi[j]) != r.hi[j] || int'(dut.ho[j]) != r.ho[j]) begin
              failures++;
              $display("FAIL hidden node %0d: hi %0d ho %0d expected %0d %0d", j, dut.hi[j], dut.ho[j], r.hi[j], r.ho[j]);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
