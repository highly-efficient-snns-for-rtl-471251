// snn_top: spiking object-detection network for continuous inference.
//
// A chain of N_LAYERS SNN layers, each with its own integer parameters and
// membrane potential memory, connected through spike frame buffers. The host
// writes one binary spike frame (IMG_H x IMG_W pixels, CH spike bits per
// pixel) into the input buffer and pulses start; the layers then run one
// after another, each turning the spike frame of its input buffer into the
// spike frame of its output buffer, and done pulses when the last layer has
// written the result frame, which the host reads through the result port.
// Every start is one time step. Membrane potentials are kept between time
// steps, so after the first N frames of a scene every new spike frame yields
// a new output frame (continuous inference with FewdIF neurons); clear zeroes
// all membrane potentials at the start of a new scene. N is the host-set
// warmup_frames; result_valid tells whether the result frame of the last
// time step counts as a detection result (frame_count >= N).
//
// Default network (this design's choice, the layer list of the deployed
// network not being available): a stride-1 convolution at full resolution, a
// stride-2 down-sampling convolution, and a stride-2 transposed convolution
// back to full resolution, with 3x3 kernels, one spike bit per input pixel
// (IN_CH = 1, as from a spiking camera), CH = 8 channels after every layer,
// 4-bit weights (LAYER_W_BITS may set 8 for layers kept at int8), 32-bit
// biases, thresholds and membrane potentials, on a 256x256 input, the frame
// size of the FPGA comparison.
//
// Interfaces: parameters are loaded over the param_we/param_wr bus (see
// snn_pkg::param_wr_t). frame_we/frame_waddr/frame_wdata write the input
// buffer at pixel y*IMG_W+x; res_re/res_raddr give res_rdata one clock later.
// The input buffer may be written and the result buffer read only while busy
// is low. start and clear are accepted while busy is low; clear wins.
// Timing: counted from the clock edge that accepts start to the one that
// raises done, a time step takes the sum over the layers of
// OUT_H*OUT_W*K*K + 6 clocks (the layer's own OUT_H*OUT_W*K*K + 3 plus 3
// clocks of hand-over). Clearing takes the largest layer's OUT_H*OUT_W
// clocks plus 2.
module snn_top
  import snn_pkg::*;
#(
  parameter int unsigned IMG_H    = 256,
  parameter int unsigned IMG_W    = 256,
  parameter int unsigned IN_CH    = 1,   // spike bits per input pixel
  parameter int unsigned CH       = 8,   // channels of every layer output
  parameter int unsigned K        = 3,
  parameter int unsigned N_LAYERS = 3,
  parameter layer_kind_e LAYER_KIND [N_LAYERS] = '{LAYER_CONV_S1, LAYER_CONV_S2, LAYER_TCONV_S2},
  parameter int unsigned LAYER_W_BITS [N_LAYERS] = '{WEIGHT_W, WEIGHT_W, WEIGHT_W},
  localparam int unsigned IMG_AW  = $clog2(IMG_H * IMG_W),
  localparam int unsigned RES_H   = stage_h(N_LAYERS),
  localparam int unsigned RES_W   = stage_w(N_LAYERS),
  localparam int unsigned RES_AW  = $clog2(RES_H * RES_W)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              param_we,
  input  param_wr_t         param_wr,
  input  logic              frame_we,
  input  logic [IMG_AW-1:0] frame_waddr,
  input  logic [IN_CH-1:0]  frame_wdata,
  input  logic              start,
  input  logic              clear,
  output logic              busy,
  output logic              done,
  output logic [31:0]       frame_count,  // time steps since the last clear
  input  logic [31:0]       warmup_frames,
  output logic              result_valid, // frame_count >= warmup_frames, > 0
  input  logic              res_re,
  input  logic [RES_AW-1:0] res_raddr,
  output logic [CH-1:0]     res_rdata
);

  function automatic int unsigned stage_h(int unsigned s);
    int unsigned h = IMG_H;
    for (int unsigned l = 0; l < s; l++) h = out_dim(LAYER_KIND[l], h);
    return h;
  endfunction

  function automatic int unsigned stage_w(int unsigned s);
    int unsigned w = IMG_W;
    for (int unsigned l = 0; l < s; l++) w = out_dim(LAYER_KIND[l], w);
    return w;
  endfunction

  // Spike frame buffer s sits in front of layer s; buffer N_LAYERS holds the
  // result. Addresses are carried 32 bits wide and cut to size at each RAM.
  // Buffer 0 is IN_CH bits wide, the others CH bits; all are carried as
  // CH-bit words here and the input buffer uses the low IN_CH bits.
  logic              buf_we    [N_LAYERS+1];
  logic [31:0]       buf_waddr [N_LAYERS+1];
  logic [CH-1:0]     buf_wdata [N_LAYERS+1];
  logic              buf_re    [N_LAYERS+1];
  logic [31:0]       buf_raddr [N_LAYERS+1];
  logic [CH-1:0]     buf_rdata [N_LAYERS+1];
  logic [IN_CH-1:0]  in_buf_rdata;

  logic [N_LAYERS-1:0] l_start, l_busy, l_done;
  logic                l_clear;

  localparam int unsigned AW0 = $clog2(IMG_H * IMG_W);
  sdp_ram #(.WIDTH(IN_CH), .DEPTH(IMG_H * IMG_W)) u_in_buf (
    .clk,
    .we    (frame_we && !busy),
    .waddr (frame_waddr),
    .wdata (frame_wdata),
    .re    (buf_re[0]),
    .raddr (AW0'(buf_raddr[0])),
    .rdata (in_buf_rdata)
  );
  assign buf_rdata[0] = CH'(in_buf_rdata);
  assign buf_we[0]    = 1'b0;
  assign buf_waddr[0] = '0;
  assign buf_wdata[0] = '0;

  for (genvar s = 1; s <= N_LAYERS; s++) begin : g_buf
    localparam int unsigned DEPTH = stage_h(s) * stage_w(s);
    localparam int unsigned AW    = $clog2(DEPTH);
    sdp_ram #(.WIDTH(CH), .DEPTH(DEPTH)) u_buf (
      .clk,
      .we    (buf_we[s]),
      .waddr (AW'(buf_waddr[s])),
      .wdata (buf_wdata[s]),
      .re    (buf_re[s]),
      .raddr (AW'(buf_raddr[s])),
      .rdata (buf_rdata[s])
    );
  end

  assign buf_re[N_LAYERS]    = res_re && !busy;
  assign buf_raddr[N_LAYERS] = 32'(res_raddr);
  assign res_rdata           = buf_rdata[N_LAYERS];

  for (genvar l = 0; l < N_LAYERS; l++) begin : g_layer
    localparam int unsigned IN_AW  = $clog2(stage_h(l) * stage_w(l));
    localparam int unsigned OUT_AW = $clog2(stage_h(l + 1) * stage_w(l + 1));
    localparam int unsigned CIN    = (l == 0) ? IN_CH : CH;
    logic [IN_AW-1:0]  raddr;
    logic [OUT_AW-1:0] waddr;

    snn_layer #(
      .CIN(CIN), .COUT(CH), .K(K),
      .IN_H(stage_h(l)), .IN_W(stage_w(l)),
      .KIND(LAYER_KIND[l]), .LAYER_ID(l), .W_BITS(LAYER_W_BITS[l])
    ) u_layer (
      .clk, .rst_n,
      .param_we, .param_wr,
      .start     (l_start[l]),
      .clear     (l_clear),
      .busy      (l_busy[l]),
      .done      (l_done[l]),
      .in_re     (buf_re[l]),
      .in_raddr  (raddr),
      .in_rdata  (buf_rdata[l][CIN-1:0]),
      .out_we    (buf_we[l + 1]),
      .out_waddr (waddr),
      .out_wdata (buf_wdata[l + 1])
    );

    assign buf_raddr[l]     = 32'(raddr);
    assign buf_waddr[l + 1] = 32'(waddr);
  end

  // ------------------------------------------------------------ sequencing
  typedef enum logic [1:0] {T_IDLE, T_CLEAR, T_START, T_WAIT} tstate_e;
  tstate_e state;
  localparam int unsigned LW = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1;
  logic [LW-1:0] cur;

  assign busy = (state != T_IDLE);

  // After a clear the first warmup_frames spike frames only build up the
  // membrane potentials; from then on every time step gives a valid result.
  assign result_valid = (frame_count != '0) && (frame_count >= warmup_frames);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= T_IDLE;
      cur         <= '0;
      l_start     <= '0;
      l_clear     <= 1'b0;
      done        <= 1'b0;
      frame_count <= '0;
    end else begin
      l_start <= '0;
      l_clear <= 1'b0;
      done    <= 1'b0;
      unique case (state)
        T_IDLE: begin
          cur <= '0;
          if (clear) begin
            l_clear     <= 1'b1;
            frame_count <= '0;
            state       <= T_CLEAR;
          end else if (start) begin
            state <= T_START;
          end
        end
        T_CLEAR: begin
          // all layers clear at once; wait until every one is idle again
          if (!l_clear && l_busy == '0) begin
            state <= T_IDLE;
            done  <= 1'b1;
          end
        end
        T_START: begin
          l_start[cur] <= 1'b1;
          state        <= T_WAIT;
        end
        T_WAIT: begin
          if (l_done[cur]) begin
            if (cur == LW'(N_LAYERS - 1)) begin
              state       <= T_IDLE;
              done        <= 1'b1;
              frame_count <= frame_count + 1'b1;
            end else begin
              cur   <= cur + 1'b1;
              state <= T_START;
            end
          end
        end
      endcase
    end
  end

endmodule
