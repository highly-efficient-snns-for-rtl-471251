// tb_snn_layer: self-checking test of one SNN layer for each layer kind.
//
// Three layers (stride-1 convolution, stride-2 down-sampling convolution,
// stride-2 transposed convolution) on a small 6x5 input with 3 input and 4
// output channels. The testbench models the input spike frame buffer (one
// clock read latency), loads random parameters over the parameter bus, clears
// the membranes, and then runs several spike frames back to back without
// clearing, plus one clear in the middle. Every output spike written by the
// layer is compared with the behavioural layer model of snn_ref_pkg, every
// output pixel must be written exactly once per frame, and the time from
// start to done must be OUT_H*OUT_W*9 + 3 clocks.
module tb_snn_layer;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int CIN = 3, COUT = 4, K = 3, IH = 6, IW = 5, FRAMES = 6;
  localparam int MAXO = 4 * IH * IW;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      param_we;
  param_wr_t param_wr;
  logic [2:0] start, clear, busy, done;

  bit   in_frame [3][IH * IW][CIN];
  int   got      [3][MAXO][COUT];
  int   nwrites  [3][MAXO];
  int checks = 0, failures = 0;

  for (genvar k = 0; k < 3; k++) begin : g_dut
    localparam layer_kind_e KIND = layer_kind_e'(k);
    localparam int OH = out_dim(KIND, IH), OW = out_dim(KIND, IW);
    localparam int IAW = $clog2(IH * IW), OAW = $clog2(OH * OW);
    logic in_re, out_we;
    logic [IAW-1:0] in_raddr;
    logic [OAW-1:0] out_waddr;
    logic [CIN-1:0] in_rdata;
    logic [COUT-1:0] out_wdata;

    snn_layer #(.CIN(CIN), .COUT(COUT), .K(K), .IN_H(IH), .IN_W(IW),
                .KIND(KIND), .LAYER_ID(k)) dut (
      .clk, .rst_n, .param_we, .param_wr,
      .start (start[k]), .clear (clear[k]), .busy (busy[k]), .done (done[k]),
      .in_re, .in_raddr, .in_rdata, .out_we, .out_waddr, .out_wdata);

    always_ff @(posedge clk) begin
      if (in_re)
        for (int i = 0; i < CIN; i++) in_rdata[i] <= in_frame[k][in_raddr][i];
      if (out_we) begin
        for (int o = 0; o < COUT; o++) got[k][out_waddr][o] <= int'(out_wdata[o]);
        nwrites[k][out_waddr] <= nwrites[k][out_waddr] + 1;
      end
    end
  end

  task automatic pwrite(int layer, param_sel_e sel, int tap, int o, int i, logic [31:0] d);
    @(negedge clk);
    param_we = 1;
    param_wr = '{sel: sel, layer: 8'(layer), tap: 8'(tap), cout: 8'(o), cin: 8'(i), data: d};
    @(negedge clk);
    param_we = 0;
  endtask

  task automatic pulse(ref logic [2:0] sig, input int k, output int cycles);
    @(negedge clk);
    sig[k] = 1'b1;
    @(negedge clk);
    sig[k] = 1'b0;
    cycles = 0;  // clock edges after the one that accepted the pulse
    while (!done[k]) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  layer_model m [3];

  initial begin
    int cyc, oh, ow, n_spikes_seen;
    bit fin[], fout[];
    param_we = 0; param_wr = '0; start = '0; clear = '0;
    foreach (nwrites[k, a]) nwrites[k][a] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    n_spikes_seen = 0;

    for (int k = 0; k < 3; k++) begin
      m[k] = new(k, CIN, COUT, K, IH, IW);
      for (int t = 0; t < K * K; t++)
        for (int o = 0; o < COUT; o++)
          for (int i = 0; i < CIN; i++) begin
            m[k].w[(t * COUT + o) * CIN + i] = $urandom_range(0, 15) - 8;
            pwrite(k, PSEL_WEIGHT, t, o, i, 32'(m[k].w[(t * COUT + o) * CIN + i]));
          end
      for (int o = 0; o < COUT; o++) begin
        m[k].bias[o] = longint'($urandom_range(0, 8)) - 4;
        pwrite(k, PSEL_BIAS, 0, o, 0, 32'(m[k].bias[o]));
      end
      m[k].vth  = $urandom_range(4, 9);
      m[k].nmax = $urandom_range(1, 2);
      m[k].nmin = -longint'($urandom_range(0, 1));
      pwrite(k, PSEL_VTH, 0, 0, 0, 32'(m[k].vth));
      pwrite(k, PSEL_SCALE, 0, 0, 0, {16'd0, 8'(m[k].nmax), 8'(m[k].nmin)});

      oh = m[k].oh; ow = m[k].ow;
      pulse(clear, k, cyc);
      checks++;
      if (cyc != oh * ow) begin
        failures++;
        $display("FAIL kind %0d: clear took %0d clocks, expected %0d", k, cyc, oh * ow);
      end
      for (int f = 0; f < FRAMES; f++) begin
        if (f == FRAMES / 2) begin
          pulse(clear, k, cyc);
          m[k].clear();
        end
        fin = new[IH * IW * CIN];
        foreach (fin[j]) begin
          fin[j] = ($urandom_range(0, 99) < 40);
          in_frame[k][j / CIN][j % CIN] = fin[j];
        end
        foreach (nwrites[k][a]) nwrites[k][a] = 0;
        pulse(start, k, cyc);
        m[k].step(fin, fout);
        // cycles counted from the clock edge that accepts start to done
        checks++;
        if (cyc != oh * ow * K * K + 3) begin
          failures++;
          $display("FAIL kind %0d frame %0d: %0d clocks, expected %0d", k, f, cyc, oh * ow * K * K + 3);
        end
        @(negedge clk);
        for (int a = 0; a < oh * ow; a++) begin
          checks++;
          if (nwrites[k][a] != 1) begin
            failures++;
            $display("FAIL kind %0d frame %0d: pixel %0d written %0d times", k, f, a, nwrites[k][a]);
          end
          for (int o = 0; o < COUT; o++) begin
            checks++;
            if (got[k][a][o] != int'(fout[a * COUT + o])) begin
              failures++;
              $display("FAIL kind %0d frame %0d pixel %0d ch %0d: spike %0d expected %0d",
                       k, f, a, o, got[k][a][o], fout[a * COUT + o]);
            end
            n_spikes_seen += got[k][a][o];
          end
        end
      end
      $display("kind %0d: %0d spikes, %0d upper clamps, %0d lower clamps, %0d padding taps",
               k, m[k].n_spike, m[k].n_clamp_hi, m[k].n_clamp_lo, m[k].n_pad_taps);
      checks++;
      if (m[k].n_spike == 0 || m[k].n_clamp_hi == 0 || m[k].n_clamp_lo == 0) begin
        failures++;
        $display("FAIL kind %0d: spike or clamp never exercised", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
