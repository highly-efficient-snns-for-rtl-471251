// tb_snn_top: end-to-end test of the spiking network, reduced frame size.
//
// Runs the default three-layer network (stride-1 convolution, stride-2
// down-sampling convolution, stride-2 transposed convolution) on a 10x8
// frame with 2 input channels, 4 channels after each layer, and 8-bit weights
// in the first layer (4-bit in the others). Random integer parameters are
// loaded over the parameter bus, the membranes are cleared, and a stream of random spike
// frames is pushed through as consecutive time steps, with one clear (new
// scene) in the middle. After every time step the whole result frame is read
// back and compared with a chain of behavioural layer models, the time step
// length is checked against the per-layer schedule, and frame_count is
// checked.
//
// Mechanisms counted, each of which must occur at least once: output spikes
// in every layer, the upper and the lower FewdIF clamp, padding taps, a
// clear between frames, time steps inside and after the warm-up (result_valid
// low and high), and continuous inference actually carrying
// information: output spikes that differ from what the same frame gives
// with freshly zeroed membranes (a second model chain, cleared every frame).
module tb_snn_top;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int H = 10, W = 8, CH = 4, K = 3, NL = 3, FRAMES = 8;
  localparam int AW = $clog2(H * W);
  localparam int IN_CH = 2;
  localparam int unsigned WB [NL] = '{8, 4, 4};   // weight bits per layer

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic param_we, frame_we, start, clear, busy, done, res_re, result_valid;
  logic [31:0] warmup_frames;
  param_wr_t param_wr;
  logic [AW-1:0] frame_waddr, res_raddr;
  logic [IN_CH-1:0] frame_wdata;
  logic [CH-1:0] res_rdata;
  logic [31:0] frame_count;
  int checks = 0, failures = 0;

  snn_top #(.IMG_H(H), .IMG_W(W), .IN_CH(IN_CH), .CH(CH), .K(K), .LAYER_W_BITS(WB)) dut (.*);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pwrite(int layer, param_sel_e sel, int tap, int o, int i, logic [31:0] d);
    @(negedge clk);
    param_we = 1;
    param_wr = '{sel: sel, layer: 8'(layer), tap: 8'(tap), cout: 8'(o), cin: 8'(i), data: d};
    @(negedge clk);
    param_we = 0;
  endtask

  task automatic run(ref logic sig, output int cycles);
    @(negedge clk);
    sig = 1;
    @(negedge clk);
    sig = 0;
    cycles = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  layer_model m [NL], fresh [NL];

  initial begin
    int cyc, exp_cyc, n_hist, n_clears, n_warm, n_valid;
    bit fin[], f1[], f2[], g1[], g2[], fout[], gout[];
    param_we = 0; param_wr = '0; frame_we = 0; frame_waddr = '0; frame_wdata = '0;
    start = 0; clear = 0; res_re = 0; res_raddr = '0;
    warmup_frames = 2;
    n_hist = 0; n_clears = 0; n_warm = 0; n_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // parameters
    for (int l = 0; l < NL; l++) begin
      automatic int ih = (l == 0) ? H : m[l - 1].oh;
      automatic int iw = (l == 0) ? W : m[l - 1].ow;
      automatic int cin = (l == 0) ? IN_CH : CH;
      automatic int half = 1 << (WB[l] - 1);
      m[l] = new(l, cin, CH, K, ih, iw);
      fresh[l] = new(l, cin, CH, K, ih, iw);
      for (int t = 0; t < K * K; t++)
        for (int o = 0; o < CH; o++)
          for (int i = 0; i < cin; i++) begin
            automatic int wv = $urandom_range(0, 2 * half - 1) - half;
            m[l].w[(t * CH + o) * cin + i] = wv;
            fresh[l].w[(t * CH + o) * cin + i] = wv;
            pwrite(l, PSEL_WEIGHT, t, o, i, 32'(wv));
          end
      for (int o = 0; o < CH; o++) begin
        automatic longint b = longint'($urandom_range(0, 6)) - 3;
        m[l].bias[o] = b; fresh[l].bias[o] = b;
        pwrite(l, PSEL_BIAS, 0, o, 0, 32'(b));
      end
      m[l].vth = (WB[l] == 8) ? 60 : 6 + l;
      fresh[l].vth = m[l].vth;
      m[l].nmax = 2; fresh[l].nmax = 2;
      m[l].nmin = -1; fresh[l].nmin = -1;
      pwrite(l, PSEL_VTH, 0, 0, 0, 32'(m[l].vth));
      pwrite(l, PSEL_SCALE, 0, 0, 0, {16'd0, 8'sd2, -8'sd1});
    end
    exp_cyc = 0;
    for (int l = 0; l < NL; l++) exp_cyc += m[l].oh * m[l].ow * K * K + 6;

    run(clear, cyc);
    n_clears++;
    chk(frame_count == 0, "frame_count after clear");

    for (int f = 0; f < FRAMES; f++) begin
      if (f == FRAMES / 2) begin
        run(clear, cyc);
        n_clears++;
        foreach (m[l]) m[l].clear();
        chk(frame_count == 0, "frame_count after second clear");
      end
      fin = new[H * W * IN_CH];
      foreach (fin[j]) fin[j] = ($urandom_range(0, 99) < 35);
      for (int a = 0; a < H * W; a++) begin
        @(negedge clk);
        frame_we = 1;
        frame_waddr = AW'(a);
        for (int i = 0; i < IN_CH; i++) frame_wdata[i] = fin[a * IN_CH + i];
      end
      @(negedge clk);
      frame_we = 0;
      run(start, cyc);
      chk(cyc == exp_cyc, $sformatf("frame %0d took %0d clocks, expected %0d", f, cyc, exp_cyc));
      chk(frame_count == 32'((f < FRAMES / 2) ? f + 1 : f - FRAMES / 2 + 1), "frame_count");
      chk(result_valid == (frame_count >= warmup_frames), "result_valid after warm-up");
      if (result_valid) n_valid++; else n_warm++;

      // reference: continuous chain and a chain with fresh membranes
      m[0].step(fin, f1);  m[1].step(f1, f2);  m[2].step(f2, fout);
      foreach (fresh[l]) fresh[l].clear();
      fresh[0].step(fin, g1); fresh[1].step(g1, g2); fresh[2].step(g2, gout);
      foreach (fout[j]) if (fout[j] != gout[j]) n_hist++;

      for (int a = 0; a < m[NL - 1].oh * m[NL - 1].ow; a++) begin
        @(negedge clk);
        res_re = 1;
        res_raddr = AW'(a);
        @(negedge clk);
        res_re = 0;
        for (int o = 0; o < CH; o++)
          chk(res_rdata[o] == fout[a * CH + o],
              $sformatf("frame %0d pixel %0d ch %0d: %0b expected %0b", f, a, o, res_rdata[o], fout[a * CH + o]));
      end
    end

    $display("mechanisms: spikes L0=%0d L1=%0d L2=%0d clamp_hi=%0d clamp_lo=%0d pad_taps=%0d clears=%0d history_effects=%0d warmup=%0d valid=%0d",
             m[0].n_spike, m[1].n_spike, m[2].n_spike,
             m[0].n_clamp_hi + m[1].n_clamp_hi + m[2].n_clamp_hi,
             m[0].n_clamp_lo + m[1].n_clamp_lo + m[2].n_clamp_lo,
             m[0].n_pad_taps + m[1].n_pad_taps, n_clears, n_hist, n_warm, n_valid);
    chk(m[0].n_spike > 0 && m[1].n_spike > 0 && m[2].n_spike > 0, "spikes in every layer");
    chk(m[0].n_clamp_hi + m[1].n_clamp_hi + m[2].n_clamp_hi > 0, "upper clamp exercised");
    chk(m[0].n_clamp_lo + m[1].n_clamp_lo + m[2].n_clamp_lo > 0, "lower clamp exercised");
    chk(m[0].n_pad_taps + m[1].n_pad_taps > 0, "padding exercised");
    chk(n_clears >= 2, "clear between frames exercised");
    chk(n_hist > 0, "continuous inference carried history");
    chk(n_warm > 0 && n_valid > 0, "warm-up and valid results both seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
