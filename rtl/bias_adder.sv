// bias_adder: the "+" node between Spike Conv and the FewdIF neurons.
//
// Adds the 32-bit integer bias of each output channel to that channel's
// 32-bit convolution sum, giving the membrane increment U of this time step.
// The result saturates at the limits of 32-bit signed integers (this design's
// choice; the paper only gives the 32-bit width).
//
// Timing: registered, one clock from in_valid to out_valid; no back-pressure.
module bias_adder
  import snn_pkg::*;
#(
  parameter int unsigned COUT = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [ACC_W-1:0]  sum  [COUT],
  input  logic signed [BIAS_W-1:0] bias [COUT],
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  u    [COUT]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < COUT; o++) u[o] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int o = 0; o < COUT; o++)
          u[o] <= sat32(64'(sum[o]) + 64'(bias[o]));
    end
  end

endmodule
