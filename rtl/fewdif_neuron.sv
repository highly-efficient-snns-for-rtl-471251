// fewdif_neuron: one Feed-Forward Integrate-and-Fire (FewdIF) neuron update.
//
// Given the stored membrane potential v_old and this time step's increment u
// (convolution sum plus bias, already in the up-scaled integer domain), the
// neuron
//   1. integrates:   v = v_old + u
//   2. fires:        spike = (v >= vth), where vth is the scaled threshold S_l*Vth
//   3. resets by subtraction on a spike: v = v - vth
//   4. clamps:       v = min(max(v, n_min*vth), n_max*vth)
// and returns the clamped potential as v_new. The potential is never zeroed
// between frames; the clamp keeps the history of earlier frames from
// over-exciting or over-inhibiting the neuron, which is what lets one new
// spike frame produce one new output in continuous inference.
//
// Integration, the threshold scaled by S_l and the clamp bounds N_max*Vth and
// N_min*Vth follow the paper. Reset by subtraction, the order "fire, then
// clamp" and saturation at 32 bits are this design's choices.
//
// Purely combinational; the caller registers v_new and spike. Widths: v_old,
// u, vth and v_new are VM_W-bit signed, n_max and n_min SCALE_W-bit signed.
module fewdif_neuron
  import snn_pkg::*;
(
  input  logic signed [VM_W-1:0]    v_old,
  input  logic signed [ACC_W-1:0]   u,
  input  logic signed [VM_W-1:0]    vth,
  input  logic signed [SCALE_W-1:0] n_max,
  input  logic signed [SCALE_W-1:0] n_min,
  output logic signed [VM_W-1:0]    v_new,
  output logic                      spike
);

  localparam int unsigned W = VM_W + SCALE_W + 2;

  logic signed [W-1:0] v_int, v_rst, v_hi, v_lo, v_clamped;

  always_comb begin
    v_int = W'(v_old) + W'(u);
    spike = (v_int >= W'(vth));
    v_rst = spike ? (v_int - W'(vth)) : v_int;
    v_hi  = W'(n_max) * W'(vth);
    v_lo  = W'(n_min) * W'(vth);
    if (v_rst > v_hi)      v_clamped = v_hi;
    else if (v_rst < v_lo) v_clamped = v_lo;
    else                   v_clamped = v_rst;
    v_new = sat32(64'(v_clamped));
  end

endmodule
