// snn_layer: one layer of the spiking network, run for one time step.
//
// Each start processes one input spike frame. The layer walks its output
// feature map pixel by pixel (row-major) and, for every pixel, the K*K kernel
// taps one per clock. For each tap it reads the CIN input spikes of the
// corresponding input pixel from the previous spike frame buffer (zero when
// the tap falls into the padding), and the Spike Conv adds the weights of the
// spiking channels for all COUT output channels in parallel. After the last
// tap the bias is added, the COUT FewdIF neurons of that pixel are updated
// against the membrane potential memory, the new potentials are written back
// and the COUT output spikes are written to the next spike frame buffer.
// Membrane potentials persist from frame to frame (continuous inference);
// clear zeroes them, which is meant for the start of a new scene.
//
// Layer kinds (KIND): 3x3 convolution with stride 1 and 'same' padding;
// stride-2 convolution used for down-sampling instead of max pooling; and
// stride-2 transposed convolution used for up-sampling (gather form, padding
// K/2, output padding 1, so the output is exactly twice the input).
//
// Pipeline and timing: tap issue -> spike RAM read (1 clock) -> Spike Conv
// accumulate (1) -> bias add (1), with the membrane read issued so that it
// returns together with the bias-added sum; neuron update and both writes
// happen in that clock. A frame takes OUT_H*OUT_W*K*K clocks of tap issue
// plus 3 clocks of pipeline drain from start to the done pulse. Clearing
// takes OUT_H*OUT_W clocks. Pixels are K*K >= 3 clocks apart, so a pixel's
// membrane read never overtakes the write-back of the one before.
//
// The datapath order (spike conv, bias add, FewdIF) and its widths follow the
// paper; the scheduling, padding conventions and memory organisation are this
// design's choices.
module snn_layer
  import snn_pkg::*;
#(
  parameter int unsigned CIN      = 8,
  parameter int unsigned COUT     = 8,
  parameter int unsigned K        = 3,
  parameter int unsigned IN_H     = 256,
  parameter int unsigned IN_W     = 256,
  parameter layer_kind_e KIND     = LAYER_CONV_S1,
  parameter int unsigned LAYER_ID = 0,
  parameter int unsigned W_BITS   = WEIGHT_W,
  localparam int unsigned OUT_H   = out_dim(KIND, IN_H),
  localparam int unsigned OUT_W   = out_dim(KIND, IN_W),
  localparam int unsigned IN_AW   = $clog2(IN_H * IN_W),
  localparam int unsigned OUT_AW  = $clog2(OUT_H * OUT_W)
) (
  input  logic              clk,
  input  logic              rst_n,
  // parameter loading
  input  logic              param_we,
  input  param_wr_t         param_wr,
  // control
  input  logic              start,     // process one spike frame
  input  logic              clear,     // zero all membrane potentials
  output logic              busy,
  output logic              done,      // one-clock pulse when start/clear work ends
  // input spike frame buffer, read port (1-clock read latency)
  output logic              in_re,
  output logic [IN_AW-1:0]  in_raddr,
  input  logic [CIN-1:0]    in_rdata,
  // output spike frame buffer, write port
  output logic              out_we,
  output logic [OUT_AW-1:0] out_waddr,
  output logic [COUT-1:0]   out_wdata
);

  localparam int unsigned TAPS = K * K;
  localparam int unsigned TW   = $clog2(TAPS);
  localparam int          P    = int'(K / 2);
  localparam int unsigned NPIX = OUT_H * OUT_W;

  if (TAPS < 3) begin : g_bad_k
    $error("snn_layer needs K*K >= 3");
  end

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [15:0]       oy, ox;
  logic [TW-1:0]     tap;
  logic [OUT_AW-1:0] pix;        // oy*OUT_W + ox
  logic              tap_last, pix_last;

  assign tap_last = (tap == TW'(TAPS - 1));
  assign pix_last = (pix == OUT_AW'(NPIX - 1));
  assign busy     = (state != S_IDLE);

  // ---------------------------------------------------------------- stage 0
  // Map (output pixel, tap) to an input pixel.
  int  ky, kx, iy, ix, ny, nx;
  logic in_range;

  always_comb begin
    ky = int'(tap) / int'(K);
    kx = int'(tap) % int'(K);
    ny = 0;
    nx = 0;
    unique case (KIND)
      LAYER_CONV_S2: begin
        iy = 2 * int'(oy) + ky - P;
        ix = 2 * int'(ox) + kx - P;
        in_range = 1'b1;
      end
      LAYER_TCONV_S2: begin
        ny = int'(oy) + P - ky;
        nx = int'(ox) + P - kx;
        iy = ny >>> 1;
        ix = nx >>> 1;
        in_range = (ny[0] == 1'b0) && (nx[0] == 1'b0);
      end
      default: begin
        iy = int'(oy) + ky - P;
        ix = int'(ox) + kx - P;
        in_range = 1'b1;
      end
    endcase
    in_range = in_range && (iy >= 0) && (iy < int'(IN_H)) && (ix >= 0) && (ix < int'(IN_W));
  end

  assign in_re    = (state == S_RUN) && in_range;
  assign in_raddr = in_range ? IN_AW'(iy * int'(IN_W) + ix) : '0;

  // ---------------------------------------------------------------- stage 1
  logic              s1_valid, s1_first, s1_last, s1_inr, s1_lastpix;
  logic [TW-1:0]     s1_tap;
  logic [OUT_AW-1:0] s1_pix;

  logic signed [W_BITS-1:0]   weights [COUT][CIN];
  logic signed [BIAS_W-1:0]   bias    [COUT];
  logic signed [VM_W-1:0]     vth;
  logic signed [SCALE_W-1:0]  n_max, n_min;

  layer_param_store #(
    .CIN(CIN), .COUT(COUT), .K(K), .LAYER_ID(LAYER_ID), .W_BITS(W_BITS)
  ) u_params (
    .clk, .rst_n, .param_we, .param_wr,
    .rd_tap (s1_tap),
    .weights, .bias, .vth, .n_max, .n_min
  );

  logic              conv_valid;
  logic signed [ACC_W-1:0] conv_sum [COUT];

  spike_conv #(.CIN(CIN), .COUT(COUT), .W_BITS(W_BITS)) u_conv (
    .clk, .rst_n,
    .in_valid  (s1_valid),
    .in_first  (s1_first),
    .in_last   (s1_last),
    .spikes    (s1_inr ? in_rdata : '0),
    .weights,
    .out_valid (conv_valid),
    .sum       (conv_sum)
  );

  // ---------------------------------------------------------------- stage 2
  logic              s2_lastpix, s3_lastpix;
  logic [OUT_AW-1:0] s2_pix, s3_pix;
  logic              u_valid;
  logic signed [ACC_W-1:0] u_sum [COUT];

  bias_adder #(.COUT(COUT)) u_bias (
    .clk, .rst_n,
    .in_valid  (conv_valid),
    .sum       (conv_sum),
    .bias,
    .out_valid (u_valid),
    .u         (u_sum)
  );

  // ---------------------------------------------------------------- membrane
  logic                   vm_we;
  logic [OUT_AW-1:0]      vm_waddr;
  logic [COUT*VM_W-1:0]   vm_wdata, vm_rdata, vm_new;
  logic [COUT-1:0]        spikes_new;

  sdp_ram #(.WIDTH(COUT * VM_W), .DEPTH(NPIX)) u_vmem (
    .clk,
    .we    (vm_we),
    .waddr (vm_waddr),
    .wdata (vm_wdata),
    .re    (conv_valid),
    .raddr (s2_pix),
    .rdata (vm_rdata)
  );

  // ---------------------------------------------------------------- stage 3
  for (genvar o = 0; o < COUT; o++) begin : g_neuron
    fewdif_neuron u_neuron (
      .v_old (vm_rdata[o*VM_W +: VM_W]),
      .u     (u_sum[o]),
      .vth, .n_max, .n_min,
      .v_new (vm_new[o*VM_W +: VM_W]),
      .spike (spikes_new[o])
    );
  end

  always_comb begin
    if (state == S_CLEAR) begin
      vm_we    = 1'b1;
      vm_waddr = pix;
      vm_wdata = '0;
    end else begin
      vm_we    = u_valid;
      vm_waddr = s3_pix;
      vm_wdata = vm_new;
    end
  end

  assign out_we    = u_valid;
  assign out_waddr = s3_pix;
  assign out_wdata = spikes_new;

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      oy         <= '0;
      ox         <= '0;
      tap        <= '0;
      pix        <= '0;
      done       <= 1'b0;
      s1_valid   <= 1'b0;
      s1_first   <= 1'b0;
      s1_last    <= 1'b0;
      s1_inr     <= 1'b0;
      s1_lastpix <= 1'b0;
      s1_tap     <= '0;
      s1_pix     <= '0;
      s2_pix     <= '0;
      s2_lastpix <= 1'b0;
      s3_pix     <= '0;
      s3_lastpix <= 1'b0;
    end else begin
      done <= 1'b0;

      // pipeline registers
      s1_valid   <= (state == S_RUN);
      s1_first   <= (tap == '0);
      s1_last    <= tap_last;
      s1_inr     <= in_range;
      s1_tap     <= tap;
      s1_pix     <= pix;
      s1_lastpix <= pix_last;
      if (s1_valid && s1_last) begin
        s2_pix     <= s1_pix;
        s2_lastpix <= s1_lastpix;
      end
      if (conv_valid) begin
        s3_pix     <= s2_pix;
        s3_lastpix <= s2_lastpix;
      end

      unique case (state)
        S_IDLE: begin
          oy  <= '0;
          ox  <= '0;
          tap <= '0;
          pix <= '0;
          if (clear)      state <= S_CLEAR;
          else if (start) state <= S_RUN;
        end
        S_CLEAR: begin
          pix <= pix + 1'b1;
          if (pix_last) begin
            pix   <= '0;
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_RUN: begin
          if (tap_last) begin
            tap <= '0;
            pix <= pix + 1'b1;
            if (ox == 16'(OUT_W - 1)) begin
              ox <= '0;
              oy <= oy + 1'b1;
            end else begin
              ox <= ox + 1'b1;
            end
            if (pix_last) state <= S_DRAIN;
          end else begin
            tap <= tap + 1'b1;
          end
        end
        S_DRAIN: begin
          if (u_valid && s3_lastpix) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
      endcase
    end
  end

  // A read of the input frame must stay inside it.
  a_in_addr: assert property (@(posedge clk) disable iff (!rst_n)
    in_re |-> (32'(in_raddr) < IN_H * IN_W));

endmodule
