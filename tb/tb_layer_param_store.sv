// tb_layer_param_store: self-checking test of the per-layer parameter store.
//
// Checks the reset values, then loads random weights, biases, threshold and
// scale factors through the parameter bus, interleaved with writes addressed
// to another layer (which must be ignored), and reads every tap back.
module tb_layer_param_store;
  import snn_pkg::*;
  localparam int CIN = 3, COUT = 4, K = 3, TAPS = K * K, ID = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic param_we;
  param_wr_t param_wr;
  logic [3:0] rd_tap;
  logic signed [WEIGHT_W-1:0] weights [COUT][CIN];
  logic signed [BIAS_W-1:0]   bias [COUT];
  logic signed [VM_W-1:0]     vth;
  logic signed [SCALE_W-1:0]  n_max, n_min;
  int checks = 0, failures = 0;
  int mw [TAPS][COUT][CIN];
  int mb [COUT];

  layer_param_store #(.CIN(CIN), .COUT(COUT), .K(K), .LAYER_ID(ID)) dut (.*);

  task automatic wr(int layer, param_sel_e sel, int tap, int o, int i, logic [31:0] d);
    @(negedge clk);
    param_we = 1;
    param_wr = '{sel: sel, layer: 8'(layer), tap: 8'(tap), cout: 8'(o), cin: 8'(i), data: d};
    @(negedge clk);
    param_we = 0;
  endtask

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    param_we = 0; param_wr = '0; rd_tap = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    chk(vth == 1 && n_max == 1 && n_min == -1, "reset constants");
    chk(weights[1][2] == 0 && bias[3] == 0, "reset weights/biases");
    for (int t = 0; t < TAPS; t++)
      for (int o = 0; o < COUT; o++)
        for (int i = 0; i < CIN; i++) begin
          mw[t][o][i] = $signed(4'($urandom));
          wr(ID, PSEL_WEIGHT, t, o, i, 32'(mw[t][o][i]));
          wr(ID + 1, PSEL_WEIGHT, t, o, i, 32'(7));   // other layer: ignored
        end
    for (int o = 0; o < COUT; o++) begin
      mb[o] = $urandom;
      wr(ID, PSEL_BIAS, 0, o, 0, 32'(mb[o]));
      wr(0, PSEL_BIAS, 0, o, 0, 32'hdead_beef);
    end
    wr(ID, PSEL_VTH, 0, 0, 0, 32'd12345);
    wr(ID, PSEL_SCALE, 0, 0, 0, {16'd0, 8'sd3, -8'sd2});
    wr(ID + 1, PSEL_VTH, 0, 0, 0, 32'd99);
    for (int t = 0; t < TAPS; t++) begin
      rd_tap = 4'(t);
      #1;
      for (int o = 0; o < COUT; o++)
        for (int i = 0; i < CIN; i++)
          chk(int'(weights[o][i]) == mw[t][o][i],
              $sformatf("weight tap %0d o %0d i %0d = %0d expected %0d", t, o, i, weights[o][i], mw[t][o][i]));
    end
    for (int o = 0; o < COUT; o++) chk(int'(bias[o]) == mb[o], $sformatf("bias %0d", o));
    chk(vth == 12345, "vth");
    chk(n_max == 3 && n_min == -2, "scale factors");
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
