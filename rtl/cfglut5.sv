// cfglut5: one node of the recurrent network, a 5-input, 1-output look-up
// table whose 32 truth-table bits can be rewritten while the device runs.
//
// The node function is the reason the network can be trained without
// rebuilding the FPGA: a new truth table is shifted in serially, one bit per
// clock on `cdi` while `ce` is high, most significant bit first, so 32 clocks
// replace the whole table (0.32 us at 100 MHz). `cdo` is the bit shifted out,
// for chaining. The look-up itself is combinational and unclocked:
// o6 = table[i], o5 = table[i[3:0]] (the lower 16-entry half).
//
// On Xilinx 7-series parts this maps onto the CFGLUT5 primitive and follows
// that primitive's documented behaviour; here it is written as plain logic so
// that it simulates anywhere. The table has no reset, as in the primitive: it
// holds whatever was last shifted in.
//
// DELAY_PS is the output's propagation delay. It matters only in simulation,
// where the recurrent loops of the network would otherwise have zero delay
// and could not settle or oscillate; synthesis ignores it. The delay is
// applied to the looked-up value, not to the address, so an address change
// that leaves the output unchanged does not disturb a transition already on
// its way. Its value is this
// design's choice (the real delay comes from the silicon and the routing).
`timescale 1ns/1ps
module cfglut5 #(
  parameter int unsigned DELAY_PS = 800
) (
  input  logic       clk,   // configuration shift clock
  input  logic       ce,    // shift enable
  input  logic       cdi,   // serial configuration data in
  input  logic [4:0] i,     // LUT address I4..I0
  output logic       o6,    // 5-input function
  output logic       o5,    // 4-input function of the lower half
  output logic       cdo    // serial configuration data out
);

  logic [31:0] table_q;
  logic        o6_now, o5_now;   // look-up result before the delay

  always_ff @(posedge clk) begin
    if (ce) table_q <= {table_q[30:0], cdi};
  end

  assign cdo = table_q[31];
  assign o6_now = table_q[i];
  assign o5_now = table_q[{1'b0, i[3:0]}];
  assign #(DELAY_PS * 1ps) o6 = o6_now;
  assign #(DELAY_PS * 1ps) o5 = o5_now;

endmodule
