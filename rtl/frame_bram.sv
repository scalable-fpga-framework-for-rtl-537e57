// frame_bram -- one-frame on-chip buffer (block RAM), simple dual port.
//
// Holds one frame of 128-bit beats. The kernel uses two of them: prvFrame,
// the odd frame waiting to be subtracted, and sumFrame, the running sum of the
// current frame pair while it is between its DRAM read and its DRAM write.
// Written as a plain array so synthesis infers block RAM.
//
// Interface: one write port (we/waddr/wdata) and one read port (re/raddr ->
// rdata). Timing: a write lands at the clock edge; a read returns its word
// one cycle after re, and rdata holds its value while re is low (the caller
// relies on that to stall). A read and a write of the same address in one
// cycle return the old word. The paper gives the buffers' role and size
// (H x W pixels each); the port arrangement and latency are choices made here.
module frame_bram #(
  parameter int unsigned DEPTH = 2560,
  parameter int unsigned WIDTH = 128,
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
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
