// adc_sampler: the "1-bit ADC" of the RPU. Each 100 MHz clock edge samples
// the asynchronous output-LUT signals; since they come from an unclocked
// network and can change at any moment, they pass through a SYNC_STAGES-deep
// flip-flop synchronizer. The sample_tag_t of the cycle that was sampled is
// delayed by the same number of stages, so samp and tag_out always belong to
// the same cycle of the input presentation: the value present on y during the
// cycle whose tag was tag_in appears on samp SYNC_STAGES cycles later.
//
// Sampling at 100 MHz follows the paper. The synchronizer depth (2) and the
// tag alignment are this design's choices.
`timescale 1ns/1ps
module adc_sampler
  import rpu_pkg::*;
#(
  parameter int unsigned N_OUT       = rpu_pkg::DEF_N_OUT,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_OUT-1:0] y,
  input  sample_tag_t      tag_in,
  output logic [N_OUT-1:0] samp,
  output sample_tag_t      tag_out
);

  logic [N_OUT-1:0] sync_q [SYNC_STAGES];
  sample_tag_t      tag_q  [SYNC_STAGES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < SYNC_STAGES; s++) begin
        sync_q[s] <= '0;
        tag_q[s]  <= '0;
      end
    end else begin
      sync_q[0] <= y;
      tag_q[0]  <= tag_in;
      for (int s = 1; s < SYNC_STAGES; s++) begin
        sync_q[s] <= sync_q[s-1];
        tag_q[s]  <= tag_q[s-1];
      end
    end
  end

  assign samp    = sync_q[SYNC_STAGES-1];
  assign tag_out = tag_q[SYNC_STAGES-1];

endmodule
