// layer_param_store: the parameters of one SNN layer.
//
// Holds the K*K x COUT x CIN integer weights (W_BITS bits, signed), one
// 32-bit integer bias per output channel, the layer's scaled threshold
// S_l*Vth, and the FewdIF scale factors N_max and N_min that bound the
// membrane potential. These are the numbers produced offline by the
// quantization and scale-aware conversion: weights multiplied by S_l and
// rounded to integers, biases rounded to 32-bit integers, threshold multiplied
// by S_l.
//
// Loading: a write on the shared parameter bus (param_we with param_wr) is
// taken when param_wr.layer equals LAYER_ID; one weight, one bias, the
// threshold or the pair of scale factors per clock. A weight write stores
// data[W_BITS-1:0]. Reading: rd_tap selects the kernel tap whose COUT x CIN
// weights appear on weights, combinationally; biases and the layer constants
// are always visible. Reset clears weights and biases and sets vth = 1,
// N_max = 1, N_min = -1, so an unloaded layer is well defined.
//
// Storing the parameters in registers, and the bus format, are this design's
// choices; the paper specifies only the widths and the meaning of the values.
module layer_param_store
  import snn_pkg::*;
#(
  parameter int unsigned CIN      = 8,
  parameter int unsigned COUT     = 8,
  parameter int unsigned K        = 3,
  parameter int unsigned LAYER_ID = 0,
  parameter int unsigned W_BITS   = WEIGHT_W,
  localparam int unsigned TAPS    = K * K,
  localparam int unsigned TW      = (TAPS > 1) ? $clog2(TAPS) : 1,
  localparam int unsigned OW      = (COUT > 1) ? $clog2(COUT) : 1,
  localparam int unsigned IW      = (CIN > 1) ? $clog2(CIN) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       param_we,
  input  param_wr_t                  param_wr,
  input  logic [TW-1:0]              rd_tap,
  output logic signed [W_BITS-1:0]   weights [COUT][CIN],
  output logic signed [BIAS_W-1:0]   bias    [COUT],
  output logic signed [VM_W-1:0]     vth,
  output logic signed [SCALE_W-1:0]  n_max,
  output logic signed [SCALE_W-1:0]  n_min
);

  logic signed [W_BITS-1:0] w_q [TAPS][COUT][CIN];

  logic hit;
  assign hit = param_we && (param_wr.layer == 8'(LAYER_ID));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < TAPS; t++)
        for (int o = 0; o < COUT; o++)
          for (int i = 0; i < CIN; i++)
            w_q[t][o][i] <= '0;
      for (int o = 0; o < COUT; o++) bias[o] <= '0;
      vth   <= VM_W'(1);
      n_max <= SCALE_W'(1);
      n_min <= -SCALE_W'(1);
    end else if (hit) begin
      unique case (param_wr.sel)
        PSEL_WEIGHT:
          if (param_wr.tap < 8'(TAPS) && param_wr.cout < 8'(COUT) && param_wr.cin < 8'(CIN))
            w_q[TW'(param_wr.tap)][OW'(param_wr.cout)][IW'(param_wr.cin)] <= param_wr.data[W_BITS-1:0];
        PSEL_BIAS:
          if (param_wr.cout < 8'(COUT)) bias[OW'(param_wr.cout)] <= param_wr.data;
        PSEL_VTH:
          vth <= param_wr.data;
        PSEL_SCALE: begin
          n_max <= param_wr.data[15:8];
          n_min <= param_wr.data[7:0];
        end
      endcase
    end
  end

  always_comb begin
    for (int o = 0; o < COUT; o++)
      for (int i = 0; i < CIN; i++)
        weights[o][i] = w_q[rd_tap][o][i];
  end

endmodule
