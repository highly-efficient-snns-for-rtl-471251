// tb_spike_conv: self-checking test of the Spike Conv unit.
//
// Feeds random windows of 9 taps (random spikes, random signed 4-bit weights),
// back to back and with idle gaps, and checks that out_valid rises exactly one
// clock after the last tap with each output channel's sum equal to the sum of
// spike*weight products computed here.
module tb_spike_conv;
  import snn_pkg::*;
  localparam int CIN = 5, COUT = 3, TAPS = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_first, in_last, out_valid;
  logic [CIN-1:0] spikes;
  logic signed [WEIGHT_W-1:0] weights [COUT][CIN];
  logic signed [ACC_W-1:0] sum [COUT];
  int checks = 0, failures = 0;

  spike_conv #(.CIN(CIN), .COUT(COUT)) dut (.*);

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; spikes = '0;
    foreach (weights[o, i]) weights[o][i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      longint exp_sum [COUT];
      foreach (exp_sum[o]) exp_sum[o] = 0;
      for (int t = 0; t < TAPS; t++) begin
        @(negedge clk);
        in_valid = 1; in_first = (t == 0); in_last = (t == TAPS - 1);
        spikes = CIN'($urandom);
        foreach (weights[o, i]) begin
          weights[o][i] = WEIGHT_W'($urandom);
          if (spikes[i]) exp_sum[o] += longint'(weights[o][i]);
        end
        if (t < TAPS - 1) begin
          #1;
          checks++;
          if (out_valid && t > 0) begin failures++; $display("FAIL: early out_valid"); end
        end
      end
      @(negedge clk);
      in_valid = 0; in_first = 0; in_last = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL %0d: out_valid missing", n); end
      foreach (sum[o]) begin
        checks++;
        if (longint'(sum[o]) != exp_sum[o]) begin
          failures++;
          $display("FAIL %0d: sum[%0d]=%0d expected %0d", n, o, sum[o], exp_sum[o]);
        end
      end
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
