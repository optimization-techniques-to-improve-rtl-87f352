// tb_ff_nn_top: end-to-end test of the full-size classifier (784-500-10,
// default parameters). Images are generated in the testbench: random
// pixels, pixels exactly at the cut-off 128, a blank image, a saturated image
// and stroke-like images with a few bright lines. They are streamed in two
// phases: back-to-back (a new image every clock) and with idle gaps. After
// every clock edge the testbench checks
//   * out_valid is high exactly one cycle after in_valid,
//   * final_in, prediction and pred_class equal the software reference
//     (nn_ref_pkg) for the last captured image, also on idle cycles when the
//     result must hold,
//   * the hidden activations inside the design equal the reference ones.
// It counts how often each mechanism of the design happened and fails if one
// never did: back-to-back images, held results, a pixel of exactly 128
// binarized to 1, hidden nodes switched off and on, and zero weights pruned.
module tb_ff_nn_top;
  localparam int unsigned N_IN  = nn_pkg::N_IN_DEF;
  localparam int unsigned N_HID = nn_pkg::N_HID_DEF;
  localparam int unsigned N_OUT = nn_pkg::N_OUT_DEF;
  localparam int unsigned PIX_W = nn_pkg::PIX_W_DEF;
  localparam int unsigned SEED  = 1;
  localparam int unsigned FI_W  = nn_pkg::sum_width(N_HID, nn_pkg::W_MAX_DEF);

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [N_IN-1:0][PIX_W-1:0] pixels;
  logic [N_OUT-1:0] prediction;
  logic [3:0] pred_class;
  logic signed [FI_W-1:0] final_in [N_OUT];

  int checks = 0, failures = 0;
  int n_back_to_back = 0, n_hold = 0, n_pix128 = 0, n_ho0 = 0, n_ho1 = 0, n_pruned = 0;
  int n_images = 0, n_ties = 0;
  int class_hist[N_OUT];

  nn_ref_pkg::result_t cur;   // reference result of the captured image
  logic have_image = 0;
  logic prev_valid = 0;

  ff_nn_top dut (.clk, .rst_n, .in_valid, .pixels, .out_valid, .prediction, .pred_class, .final_in);

  always #5 clk = ~clk;

  initial begin
    repeat (400) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void make_image(int kind);
    case (kind)
      0: for (int i = 0; i < N_IN; i++) pixels[i] = '0;
      1: for (int i = 0; i < N_IN; i++) pixels[i] = '1;
      2: for (int i = 0; i < N_IN; i++) pixels[i] = (($urandom % 2) != 0) ? PIX_W'(128) : PIX_W'(127);
      3: begin  // strokes on a 28x28 grid
        int r0 = $urandom % 28, c0 = $urandom % 28;
        for (int i = 0; i < N_IN; i++) pixels[i] = PIX_W'($urandom % 40);
        for (int k = 0; k < 28; k++) begin
          pixels[r0 * 28 + k] = PIX_W'(200 + $urandom % 56);
          pixels[k * 28 + c0] = PIX_W'(200 + $urandom % 56);
          pixels[((k + r0) % 28) * 28 + k] = PIX_W'(150 + $urandom % 106);
        end
      end
      default: for (int i = 0; i < N_IN; i++) pixels[i] = PIX_W'($urandom);
    endcase
  endfunction

  function automatic nn_ref_pkg::result_t ref_of_pixels();
    int p[] = new[N_IN];
    for (int i = 0; i < N_IN; i++) p[i] = int'(pixels[i]);
    return nn_ref_pkg::run(p, N_HID, N_OUT, nn_pkg::THRESHOLD_DEF, SEED, nn_pkg::W_MAX_DEF);
  endfunction

  task automatic check_outputs();
    checks++;
    if (out_valid !== prev_valid) begin
      failures++;
      $display("FAIL out_valid=%0b expected %0b", out_valid, prev_valid);
    end
    if (!have_image) return;
    for (int k = 0; k < N_OUT; k++) begin
      checks++;
      if (int'(final_in[k]) != cur.fi[k]) begin
        failures++;
        $display("FAIL final_in[%0d]=%0d expected %0d", k, final_in[k], cur.fi[k]);
      end
    end
    checks++;
    if (int'(pred_class) != cur.cls || prediction != (N_OUT'(1) << cur.cls)) begin
      failures++;
      $display("FAIL class %0d (%b) expected %0d", pred_class, prediction, cur.cls);
    end
    checks++;
    for (int j = 0; j < N_HID; j++)
      if (int'(dut.ho[j]) != cur.ho[j]) begin
        failures++;
        $display("FAIL hidden activation %0d", j);
        break;
      end
  endtask

  // one clock: optionally present an image, then check after the edge
  task automatic step(logic valid, int kind);
    nn_ref_pkg::result_t nxt;
    in_valid = valid;
    if (valid) begin
      make_image(kind);
      nxt = ref_of_pixels();
      for (int i = 0; i < N_IN; i++) if (pixels[i] == PIX_W'(128) && nxt.in_bin[i] == 1) n_pix128++;
    end
    @(posedge clk); #1;
    if (valid) begin
      if (prev_valid) n_back_to_back++;
      cur = nxt; have_image = 1; n_images++;
      if (cur.tie != 0) n_ties++;
      class_hist[cur.cls]++;
      foreach (cur.ho[j]) if (cur.ho[j] != 0) n_ho1++; else n_ho0++;
    end else if (have_image) n_hold++;
    prev_valid = valid;
    check_outputs();
  endtask

  initial begin
    for (int j = 0; j < N_HID; j++)
      for (int i = 0; i < N_IN; i++)
        if (nn_pkg::weight(SEED, 0, i, j, nn_pkg::W_MAX_DEF) == 0) n_pruned++;
    for (int k = 0; k < N_OUT; k++) class_hist[k] = 0;
    pixels = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (out_valid !== 1'b0) begin failures++; $display("FAIL out_valid during reset"); end
    rst_n = 1;
    // back-to-back phase
    for (int t = 0; t < 40; t++) step(1, t % 5);
    // gaps: hold the result while no image arrives
    for (int t = 0; t < 30; t++) step(t % 3 == 0, 3 + t % 2);
    step(0, 0);
    $display("images=%0d back_to_back=%0d hold_cycles=%0d pixels_at_128=%0d ho_off=%0d ho_on=%0d pruned_weights=%0d ties=%0d",
             n_images, n_back_to_back, n_hold, n_pix128, n_ho0, n_ho1, n_pruned, n_ties);
    for (int k = 0; k < N_OUT; k++) $display("class %0d predicted %0d times", k, class_hist[k]);
    checks++;
    if (n_back_to_back == 0 || n_hold == 0 || n_pix128 == 0 || n_ho0 == 0 || n_ho1 == 0 || n_pruned == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
