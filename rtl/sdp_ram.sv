// sdp_ram: simple dual-port RAM, one write port and one read port on one
// clock.
//
// Used for the per-layer membrane potential memory, which must keep every
// neuron's potential from one spike frame to the next, and for the spike frame
// buffers that pass one layer's output spikes to the next layer. A write
// stores wdata at waddr on the clock edge. A read with re high returns
// mem[raddr] on rdata one clock later and holds it until the next read;
// reading the address being written in the same clock returns the old word.
// The memory has no reset: its contents are cleared by writing it.
module sdp_ram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
