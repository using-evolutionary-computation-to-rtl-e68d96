// reservoir: the unclocked, recurrent network of reconfigurable LUTs.
//
// N_LUT cfglut5 nodes are wired by the fixed random topology of rpu_pkg:
// LUT j (j < N_IN) receives network input x[j] on pin 0, every other pin is
// driven by some LUT output, and the last N_OUT LUTs are the outputs y. No
// clock reaches the look-ups: the network is a web of combinational loops
// whose settling, ringing and oscillation (shaped by the LUT and wire delays)
// are the computation. The combinational-loop warnings that synthesis and
// lint tools print for this module are therefore expected; on an FPGA the
// loops must be kept by the place-and-route flow.
//
// Configuration: every LUT has its own serial line cfg_di[j]; all LUTs shift
// together while cfg_ce is high, so a whole network is replaced in 32 cycles
// of cfg_clk. `node` exposes all LUT outputs for observation.
//
// The paper fixes the sizes and the topology rules; which LUT gets which
// input, the random draw and the simulation delays are this design's own.
`timescale 1ns/1ps
module reservoir
  import rpu_pkg::*;
#(
  parameter int unsigned N_LUT = rpu_pkg::DEF_N_LUT,
  parameter int unsigned N_IN  = rpu_pkg::DEF_N_IN,
  parameter int unsigned N_OUT = rpu_pkg::DEF_N_OUT,
  parameter logic [31:0] SEED  = rpu_pkg::DEF_SEED
) (
  input  logic             cfg_clk,
  input  logic             cfg_ce,
  input  logic [N_LUT-1:0] cfg_di,
  input  logic [N_IN-1:0]  x,
  output logic [N_OUT-1:0] y,
  output logic [N_LUT-1:0] node
);

  if (N_IN + N_OUT > N_LUT) begin : g_bad_size
    $error("reservoir: N_IN + N_OUT must not exceed N_LUT");
  end

  for (genvar j = 0; j < N_LUT; j++) begin : g_node
    logic [LUT_K-1:0] pins;
    for (genvar p = 0; p < LUT_K; p++) begin : g_pin
      if (pin_is_input(j, p, N_IN)) begin : g_in
        assign pins[p] = x[j];
      end else begin : g_rec
        assign pins[p] = node[src_lut(SEED, j, p, N_LUT)];
      end
    end
    logic o5_unused, cdo_unused;
    cfglut5 #(.DELAY_PS(node_delay_ps(SEED, j))) u_lut (
      .clk (cfg_clk),
      .ce  (cfg_ce),
      .cdi (cfg_di[j]),
      .i   (pins),
      .o6  (node[j]),
      .o5  (o5_unused),
      .cdo (cdo_unused)
    );
  end

  assign y = node[N_LUT-1 -: N_OUT];

endmodule
