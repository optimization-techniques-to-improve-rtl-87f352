// tb_prediction_lut: self-checking test of prediction_lut.
// 1. Default size (10 classes, 14-bit sums): random values, values drawn from
//    a narrow range so that ties are frequent, and all-equal inputs. The
//    expected class is found in the testbench as the maximum value first and
//    then the highest class holding it; the one-hot output must match.
// 2. Three classes: every combination of values -2..2 is compared with the
//    priority expression of the 3-input reference network,
//    (fi1 > fi2 && fi1 > fi3) ? 1 : (fi2 > fi3) ? 2 : 3 (minus one here,
//    classes being numbered from 0).
module tb_prediction_lut;
  localparam int unsigned N = nn_pkg::N_OUT_DEF;
  localparam int unsigned W = nn_pkg::sum_width(nn_pkg::N_HID_DEF, nn_pkg::W_MAX_DEF);

  logic signed [W-1:0] fi [N];
  logic [N-1:0] prediction;
  logic [3:0] pred_class;
  logic signed [5:0] f3 [3];
  logic [2:0] p3;
  logic [1:0] c3;
  int checks = 0, failures = 0, ties = 0;

  prediction_lut dut (.fi, .prediction, .pred_class);
  prediction_lut #(.N(3), .SUM_W(6)) dut3 (.fi(f3), .prediction(p3), .pred_class(c3));

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check10();
    int mx, exp_k, cnt;
    #1;
    mx = int'(fi[0]);
    for (int k = 1; k < N; k++) if (int'(fi[k]) > mx) mx = int'(fi[k]);
    exp_k = 0; cnt = 0;
    for (int k = 0; k < N; k++) if (int'(fi[k]) == mx) begin exp_k = k; cnt++; end
    if (cnt > 1) ties++;
    checks++;
    if (int'(pred_class) != exp_k || prediction != (N'(1) << exp_k)) begin
      failures++;
      if (failures < 10) $display("FAIL class %0d expected %0d onehot %b", pred_class, exp_k, prediction);
    end
  endtask

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k < N; k++) fi[k] = W'(int'($urandom % 16384) - 8192);
      check10();
    end
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k < N; k++) fi[k] = W'(int'($urandom % 5) - 2);
      check10();
    end
    for (int k = 0; k < N; k++) fi[k] = W'(-5);
    check10();
    checks++;
    if (ties == 0) begin failures++; $display("FAIL no ties applied"); end
    for (int a = -2; a <= 2; a++)
      for (int b = -2; b <= 2; b++)
        for (int c = -2; c <= 2; c++) begin
          int exp3;
          f3[0] = 6'(a); f3[1] = 6'(b); f3[2] = 6'(c);
          #1;
          exp3 = (a > b && a > c) ? 1 : (b > c) ? 2 : 3;
          checks++;
          if (int'(c3) != exp3 - 1 || p3 != (3'(1) << (exp3 - 1))) begin
            failures++;
            $display("FAIL 3-way %0d %0d %0d -> %0d expected %0d", a, b, c, c3, exp3 - 1);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
