// tb_input_register: self-checking test of input_register at its default
// size (784 pixels of 8 bits). Random images are loaded with a random load
// enable; after every clock edge the registered image and the one-cycle
// valid pulse are compared with a model kept in the testbench. Reset is
// checked to clear both. A watchdog ends the run if it hangs.
module tb_input_register;
  localparam int unsigned N_IN  = nn_pkg::N_IN_DEF;
  localparam int unsigned PIX_W = nn_pkg::PIX_W_DEF;

  logic clk = 0, rst_n, load, q_valid;
  logic [N_IN-1:0][PIX_W-1:0] d, q, model_q;
  logic model_v;
  int checks = 0, failures = 0;
  int loads = 0, holds = 0;

  input_register dut (.clk, .rst_n, .load, .d, .q, .q_valid);

  always #5 clk = ~clk;

  task automatic randomize_image();
    for (int i = 0; i < N_IN; i++) d[i] = PIX_W'($urandom);
  endtask

  task automatic check(string what);
    checks++;
    if (q !== model_q || q_valid !== model_v) begin
      failures++;
      $display("FAIL %s: q_valid=%0b expected %0b, image match=%0b", what, q_valid, model_v, q == model_q);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; load = 1; randomize_image();
    @(posedge clk); #1;
    model_q = '0; model_v = 0;
    check("reset");
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      load = ($urandom % 3) != 0;
      randomize_image();
      @(posedge clk); #1;
      model_v = load;
      if (load) begin model_q = d; loads++; end else holds++;
      check("cycle");
    end
    // reset in the middle clears a held image
    rst_n = 0; @(posedge clk); #1;
    model_q = '0; model_v = 0;
    check("reset again");
    if (loads == 0 || holds == 0) begin failures++; $display("FAIL no load/hold mix"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
