// tb_sdp_ram: self-checking test of the simple dual-port RAM.
//
// Writes random words, reads them back with random addresses and checks the
// one-clock read latency, that rdata holds while re is low, and that a read
// of the address being written in the same clock returns the old word.
module tb_sdp_ram;
  localparam int WIDTH = 12, DEPTH = 40, AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = WIDTH'($urandom); model[a] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      int ra;
      logic [WIDTH-1:0] expv;
      ra = $urandom_range(0, DEPTH - 1);
      expv = model[ra];
      @(negedge clk);
      re = 1; raddr = AW'(ra);
      we = ($urandom_range(0, 1) == 1);
      waddr = (n % 7 == 0) ? AW'(ra) : AW'($urandom_range(0, DEPTH - 1));
      wdata = WIDTH'($urandom);
      @(negedge clk);
      if (we) model[waddr] = wdata;
      re = 0; we = 0;
      checks++;
      if (rdata !== expv) begin
        failures++;
        $display("FAIL %0d: mem[%0d]=%h expected %h", n, ra, rdata, expv);
      end
      @(negedge clk);
      checks++;
      if (rdata !== expv) begin failures++; $display("FAIL %0d: rdata not held", n); end
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
