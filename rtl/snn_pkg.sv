// snn_pkg: widths, layer types and helper functions shared by the spiking
// object-detection datapath.
//
// Spikes are single bits. Weights are small signed integers (4 bit in the
// deployed network), while convolution sums, biases and membrane potentials are
// 32-bit signed integers, so that the whole inference runs on integer
// arithmetic only. The threshold stored per layer is the scaled threshold
// S_l*Vth that goes with the up-scaled integer weights.
//
// The three layer types are the ones the network is built from: a 3x3
// convolution with stride 1, a stride-2 "down-sampling" convolution that takes
// the place of max pooling, and a stride-2 transposed convolution that takes the
// place of up-sampling. Which layers the network has, and in which order, is
// this design's choice.
package snn_pkg;

  localparam int unsigned WEIGHT_W = 4;   // default weight precision (deployed network)
  localparam int unsigned BIAS_W   = 32;  // bias precision
  localparam int unsigned ACC_W    = 32;  // convolution sum precision
  localparam int unsigned VM_W     = 32;  // membrane potential precision
  localparam int unsigned SCALE_W  = 8;   // N_max / N_min scale factors

  typedef enum logic [1:0] {
    LAYER_CONV_S1  = 2'd0,  // 3x3 convolution, stride 1, 'same' padding
    LAYER_CONV_S2  = 2'd1,  // 3x3 convolution, stride 2 (down-sampling)
    LAYER_TCONV_S2 = 2'd2   // 3x3 transposed convolution, stride 2 (up-sampling)
  } layer_kind_e;

  // Parameter write bus. One write per clock loads one item of one layer:
  // a single weight (tap, cout, cin), a bias (cout), the scaled threshold, or
  // the two FewdIF scale factors (data[15:8] = N_max, data[7:0] = N_min).
  typedef enum logic [1:0] {
    PSEL_WEIGHT = 2'd0,
    PSEL_BIAS   = 2'd1,
    PSEL_VTH    = 2'd2,
    PSEL_SCALE  = 2'd3
  } param_sel_e;

  typedef struct packed {
    param_sel_e  sel;
    logic [7:0]  layer;
    logic [7:0]  tap;    // ky*K + kx
    logic [7:0]  cout;
    logic [7:0]  cin;
    logic [31:0] data;
  } param_wr_t;

  // Output height/width of a layer for a given input height/width.
  function automatic int unsigned out_dim(layer_kind_e kind, int unsigned in_dim);
    case (kind)
      LAYER_CONV_S2:  return (in_dim + 1) / 2;
      LAYER_TCONV_S2: return in_dim * 2;
      default:        return in_dim;
    endcase
  endfunction

  // Saturate a wider signed value into 32 bits.
  function automatic logic signed [31:0] sat32(logic signed [63:0] v);
    if (v > 64'sd2147483647)       return 32'sh7fff_ffff;
    else if (v < -64'sd2147483648) return 32'sh8000_0000;
    else                           return v[31:0];
  endfunction

endpackage
