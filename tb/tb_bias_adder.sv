// tb_bias_adder: self-checking test of the bias adder.
//
// Sends random sums and biases, including values that overflow 32 bits, and
// checks that each result appears exactly one clock later, equal to the
// 64-bit sum saturated to the 32-bit signed range.
module tb_bias_adder;
  import snn_pkg::*;
  localparam int COUT = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic signed [ACC_W-1:0]  sum [COUT], u [COUT];
  logic signed [BIAS_W-1:0] bias [COUT];
  int checks = 0, failures = 0, n_sat = 0;

  bias_adder #(.COUT(COUT)) dut (.*);

  function automatic longint sat(longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  initial begin
    longint exp_u [COUT];
    in_valid = 0;
    foreach (sum[o]) begin sum[o] = 0; bias[o] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      in_valid = 1;
      foreach (sum[o]) begin
        if (n % 10 == 0) begin
          sum[o]  = (o % 2) ? 32'sh7fff_0000 : 32'sh8000_1000;
          bias[o] = (o % 2) ? 32'sh0010_0000 : -32'sh0010_0000;
        end else begin
          sum[o]  = $urandom;
          bias[o] = $urandom;
        end
        exp_u[o] = sat(longint'(sum[o]) + longint'(bias[o]));
        if (exp_u[o] != longint'(sum[o]) + longint'(bias[o])) n_sat++;
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL: out_valid not one clock after in_valid"); end
      foreach (u[o]) begin
        checks++;
        if (longint'(u[o]) != exp_u[o]) begin
          failures++;
          $display("FAIL %0d: u[%0d]=%0d expected %0d", n, o, u[o], exp_u[o]);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL: out_valid held"); end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL: saturation never exercised"); end
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
