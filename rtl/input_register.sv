// input_register: the only storage of the classifier. It captures one image
// (N_IN pixels of PIX_W bits) on the rising clock edge when `load` is high
// and holds it for the clockless network behind it. `q_valid` is a one-cycle
// pulse, registered together with the image: during the cycle after a load,
// the network output belongs to the image just captured. A load every cycle
// streams one image per clock into the network.
//
// Following the design, new data is clocked into input registers and the rest
// of the network has no state. The load enable, the valid pulse and the
// synchronous active-low reset to zero are this design's own choices.
module input_register #(
  parameter int unsigned N_IN  = nn_pkg::N_IN_DEF,
  parameter int unsigned PIX_W = nn_pkg::PIX_W_DEF
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        load,
  input  logic [N_IN-1:0][PIX_W-1:0]  d,
  output logic [N_IN-1:0][PIX_W-1:0]  q,
  output logic                        q_valid
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q       <= '0;
      q_valid <= 1'b0;
    end else begin
      q_valid <= load;
      if (load) q <= d;
    end
  end

endmodule
