// sdp_ram: simple dual-port RAM, one write port and one read port, one clock.
//
// Every on-chip buffer of the accelerator is built from this memory: the
// per-PM filter buffer, the shared row buffer, the per-PM input row buffer and
// the per-PM output buffer. It is written as a plain array so that FPGA tools
// map it to block RAM.
//
// Timing: a write (we, waddr, wdata) takes effect at the clock edge. A read
// presents rdata one cycle after raddr (registered read). If the same address
// is read and written in one cycle, rdata returns the old contents
// (read-before-write). The contents are not reset.
module sdp_ram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
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
