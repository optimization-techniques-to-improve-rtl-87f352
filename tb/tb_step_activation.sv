// tb_step_activation: self-checking test of step_activation with 8 nodes of
// 6-bit sums (the width of the 3-input reference network). Every value from
// -32 to +31 is applied to every node, each node getting a different value,
// and each output is compared with (sum >= 0) worked out in the testbench.
// A second instance at the default size (500 nodes, 14-bit sums) gets random
// sums. Combinational: outputs are sampled 1 ns after each change.
module tb_step_activation;
  localparam int unsigned N = 8, W = 6;
  localparam int unsigned NF = nn_pkg::N_HID_DEF;
  localparam int unsigned WF = nn_pkg::sum_width(nn_pkg::N_IN_DEF, nn_pkg::W_MAX_DEF);

  logic signed [W-1:0] sum [N];
  logic [N-1:0] act;
  logic signed [WF-1:0] sumf [NF];
  logic [NF-1:0] actf;
  int checks = 0, failures = 0;

  step_activation #(.N(N), .SUM_W(W)) dut (.sum, .act);
  step_activation dutf (.sum(sumf), .act(actf));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    checks++;
    if (WF != 14) begin failures++; $display("FAIL default sum width %0d", WF); end
    for (int v = -32; v < 32; v++) begin
      for (int j = 0; j < N; j++) sum[j] = W'(((v + 32 + 7 * j) % 64) - 32);
      for (int j = 0; j < NF; j++) sumf[j] = WF'(int'($urandom % 16384) - 8192);
      #1;
      for (int j = 0; j < N; j++) begin
        automatic int s = ((v + 32 + 7 * j) % 64) - 32;
        checks++;
        if (act[j] !== (s >= 0)) begin
          failures++;
          $display("FAIL node %0d sum %0d act %0b", j, s, act[j]);
        end
      end
      for (int j = 0; j < NF; j++) begin
        checks++;
        if (actf[j] !== (int'(sumf[j]) >= 0)) begin
          failures++;
          if (failures < 10) $display("FAIL wide node %0d sum %0d act %0b", j, sumf[j], actf[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
