// tb_snn_workloads: the default network at the frame sizes of the published
// experiments other than the default 256x256.
//
// Two instances of snn_top_runner run side by side, each with its own snn_top:
// 224x224 (the input size quoted for the highest frame rate of the FPGA
// system) and 640x384 (the size of the accuracy experiments on video
// sequences), three time steps each with a clear after the first. Each result
// frame is compared with the behavioural models; see snn_top_runner. The
// testbench ends when both are finished, or at the watchdog.
module tb_snn_workloads;
  int c224, f224, c640, f640;
  bit d224, d640;
  logic clk = 0;
  always #5 clk = ~clk;

  snn_top_runner #(.H(224), .W(224), .FRAMES(3)) u_224 (.checks(c224), .failures(f224), .finished(d224));
  snn_top_runner #(.H(384), .W(640), .FRAMES(3)) u_640 (.checks(c640), .failures(f640), .finished(d640));

  initial begin
    wait (d224 && d640);
    $display("224x224: checks=%0d failures=%0d; 640x384: checks=%0d failures=%0d", c224, f224, c640, f640);
    $display("TB_RESULT checks=%0d failures=%0d", c224 + c640, f224 + f640);
    $finish;
  end

  initial begin
    repeat (30000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c224 + c640, f224 + f640 + 1);
    $finish;
  end
endmodule
