// sample_capture: collects the samples taken while one input vector was
// presented into a single record and writes it to the capture buffer at that
// vector's index. With the default sizes a record is 10 output LUTs x 32
// samples = 320 bits, the feature vector a back-end classifier (the RPU-RC
// mode) is trained on.
//
// Record layout: bit o*SAMPLES + p is output LUT o at phase p. When fewer than
// SAMPLES cycles per vector are used, the unused bits are 0. The record is
// assembled from the aligned samples of adc_sampler and written (wr_en high
// for one cycle) in the cycle whose tag is the vector's last; wr_data then
// already includes that last sample. The record layout is this design's
// choice; the 32 samples x 10 outputs come from the paper.
`timescale 1ns/1ps
module sample_capture
  import rpu_pkg::*;
#(
  parameter int unsigned N_OUT   = rpu_pkg::DEF_N_OUT,
  parameter int unsigned SAMPLES = rpu_pkg::DEF_SAMPLES,
  parameter int unsigned DEPTH   = rpu_pkg::DEF_BATCH,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned REC_W  = N_OUT * SAMPLES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_OUT-1:0] samp,
  input  sample_tag_t      tag,
  output logic             wr_en,
  output logic [AW-1:0]    wr_addr,
  output logic [REC_W-1:0] wr_data
);

  logic [REC_W-1:0] rec_q, rec_d;

  always_comb begin
    rec_d = tag.first ? '0 : rec_q;
    for (int o = 0; o < N_OUT; o++) begin
      if (32'(tag.phase) < SAMPLES) rec_d[o*SAMPLES + 32'(tag.phase)] = samp[o];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rec_q <= '0;
    else if (tag.valid) rec_q <= rec_d;
  end

  assign wr_en   = tag.valid && tag.last;
  assign wr_addr = AW'(tag.vec);
  assign wr_data = rec_d;

endmodule
