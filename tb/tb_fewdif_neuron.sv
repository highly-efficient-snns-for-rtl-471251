// tb_fewdif_neuron: self-checking test of the FewdIF neuron update.
//
// Drives random and directed (v_old, u, vth, N_max, N_min) combinations and
// compares spike and v_new with a 64-bit reference of integrate, fire at the
// threshold with reset by subtraction, and clamp to [N_min*vth, N_max*vth].
// Directed cases cover the upper clamp, the lower clamp, firing exactly at the
// threshold and staying silent just below it.
module tb_fewdif_neuron;
  import snn_pkg::*;

  logic signed [VM_W-1:0]    v_old, v_new, vth;
  logic signed [ACC_W-1:0]   u;
  logic signed [SCALE_W-1:0] n_max, n_min;
  logic                      spike;
  int checks = 0, failures = 0;
  int n_hi = 0, n_lo = 0, n_fire = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fewdif_neuron dut (.*);

  task automatic check_one(longint vo, longint uu, longint th, longint nx, longint nn);
    longint v, hi, lo;
    bit f;
    v_old = VM_W'(vo); u = ACC_W'(uu); vth = VM_W'(th);
    n_max = SCALE_W'(nx); n_min = SCALE_W'(nn);
    #1;
    v = vo + uu;
    f = (v >= th);
    if (f) v = v - th;
    hi = nx * th; lo = nn * th;
    if (v > hi) begin v = hi; n_hi++; end
    else if (v < lo) begin v = lo; n_lo++; end
    if (f) n_fire++;
    checks++;
    if (spike !== f || longint'(v_new) != v) begin
      failures++;
      $display("FAIL v_old=%0d u=%0d vth=%0d nmax=%0d nmin=%0d -> spike=%0b v=%0d, expected %0b %0d",
               vo, uu, th, nx, nn, spike, v_new, f, v);
    end
  endtask

  initial begin
    // directed
    check_one(0, 100, 100, 2, -1);      // fires exactly at threshold
    check_one(0, 99, 100, 2, -1);       // just below
    check_one(150, 500, 100, 2, -1);    // fires, then upper clamp to 200
    check_one(-50, -400, 100, 2, -1);   // lower clamp to -100
    check_one(190, 5, 100, 3, -2);      // fires, keeps the rest
    // random
    repeat (5000) begin
      longint th, nx, nn, lo, hi, vo, uu;
      th = longint'($urandom_range(1, 5000));
      nx = longint'($urandom_range(1, 8));
      nn = -longint'($urandom_range(0, 8));
      lo = nn * th;
      hi = nx * th;
      vo = lo + longint'($urandom_range(0, 32'(hi - lo)));
      uu = longint'($urandom_range(0, 40000)) - 20000;
      check_one(vo, uu, th, nx, nn);
    end
    if (n_hi == 0 || n_lo == 0 || n_fire == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised hi=%0d lo=%0d fire=%0d", n_hi, n_lo, n_fire);
    end
    $display("clamp_hi=%0d clamp_lo=%0d fired=%0d", n_hi, n_lo, n_fire);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
