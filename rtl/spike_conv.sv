// spike_conv: the "Spike Conv" unit, convolution of binary spikes with
// integer weights.
//
// Because an input is either a spike (1) or nothing (0), the products of a
// convolution reduce to selecting weights: for each output channel, the unit
// adds the weights of those input channels that spiked at the current kernel
// tap. One tap (all CIN input channels of one input pixel) is consumed per
// clock for all COUT output channels at once; the sums are accumulated over
// the K*K taps of the window in ACC_W-bit registers.
//
// Interface: in_valid qualifies spikes/weights for one tap; in_first marks the
// first tap of a window (the accumulator restarts), in_last the final tap.
// One clock after the final tap, out_valid pulses and sum holds the window's
// COUT sums. W_BITS is the weight width (4 by default, 8 for layers kept at
// int8). There is no back-pressure. Binary spikes, integer weights and the
// 32-bit sum follow the paper; the tap-serial, channel-parallel order is this
// design's choice.
module spike_conv
  import snn_pkg::*;
#(
  parameter int unsigned CIN  = 8,
  parameter int unsigned COUT = 8,
  parameter int unsigned W_BITS = WEIGHT_W   // weight width of this layer
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic                              in_first,
  input  logic                              in_last,
  input  logic [CIN-1:0]                    spikes,
  input  logic signed [W_BITS-1:0]          weights [COUT][CIN],
  output logic                              out_valid,
  output logic signed [ACC_W-1:0]           sum     [COUT]
);

  logic signed [ACC_W-1:0] tap_sum [COUT];
  logic signed [ACC_W-1:0] acc_q   [COUT];

  always_comb begin
    for (int o = 0; o < COUT; o++) begin
      tap_sum[o] = '0;
      for (int i = 0; i < CIN; i++)
        if (spikes[i]) tap_sum[o] = tap_sum[o] + ACC_W'(weights[o][i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < COUT; o++) acc_q[o] <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid)
        for (int o = 0; o < COUT; o++)
          acc_q[o] <= (in_first ? '0 : acc_q[o]) + tap_sum[o];
    end
  end

  assign sum = acc_q;

endmodule
