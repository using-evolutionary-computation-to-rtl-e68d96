// sdp_ram: simple dual-port RAM with one write port and one synchronous read
// port on the same clock. The RPU uses three of them per batch: the input
// vectors (DEPTH x N_IN), the captured output samples (DEPTH x N_OUT*SAMPLES)
// and the per-vector readout results. Read data appear one cycle after the
// address; a read of the address being written returns the old word. The
// contents are not reset. The default depth is one batch of 2000 vectors.
`timescale 1ns/1ps
module sdp_ram #(
  parameter int unsigned DEPTH = 2000,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
