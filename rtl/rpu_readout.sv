// rpu_readout: the on-chip decision of the recurrent processing unit (RPU
// mode, no back-end classifier) plus the transition counts used as the
// "output frequency" of the digital-to-frequency task.
//
// For each input vector and each output LUT it counts, over the samples of
// that vector's presentation, the samples that were 1 (the average output
// times the number of samples) and the transitions between consecutive
// samples (0->1 or 1->0; the window's first sample is not compared with the
// previous window). The predicted class is the output LUT with the largest
// count of ones; on a tie the lowest index wins. The result (res_*) is valid
// for one cycle, in the cycle whose tag is the vector's last, so it covers
// every sample of the window.
//
// Averaging and arg-max, and counting transitions, follow the paper, which
// performs them in software on the host; doing them in the fabric, the
// tie-break and the window boundaries are this design's choices.
`timescale 1ns/1ps
module rpu_readout
  import rpu_pkg::*;
#(
  parameter int unsigned N_OUT   = rpu_pkg::DEF_N_OUT,
  parameter int unsigned SAMPLES = rpu_pkg::DEF_SAMPLES,
  localparam int unsigned CW     = $clog2(SAMPLES + 1),
  localparam int unsigned CLS_W  = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [N_OUT-1:0]          samp,
  input  sample_tag_t               tag,
  output logic                      res_valid,
  output logic [VEC_W-1:0]          res_vec,
  output logic [CLS_W-1:0]          res_class,
  output logic [N_OUT-1:0][CW-1:0]  res_ones,
  output logic [N_OUT-1:0][CW-1:0]  res_trans
);

  logic [N_OUT-1:0][CW-1:0] ones_q, trans_q, ones_d, trans_d;
  logic [N_OUT-1:0]         prev_q;

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      if (tag.first) begin
        ones_d[o]  = CW'(samp[o]);
        trans_d[o] = '0;
      end else begin
        ones_d[o]  = ones_q[o] + CW'(samp[o]);
        trans_d[o] = trans_q[o] + CW'(samp[o] ^ prev_q[o]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ones_q  <= '0;
      trans_q <= '0;
      prev_q  <= '0;
    end else if (tag.valid) begin
      ones_q  <= ones_d;
      trans_q <= trans_d;
      prev_q  <= samp;
    end
  end

  always_comb begin
    logic [CW-1:0] best;
    res_class = '0;
    best      = ones_d[0];
    for (int o = 1; o < N_OUT; o++) begin
      if (ones_d[o] > best) begin
        best      = ones_d[o];
        res_class = CLS_W'(o);
      end
    end
  end

  assign res_valid = tag.valid && tag.last;
  assign res_vec   = tag.vec;
  assign res_ones  = ones_d;
  assign res_trans = trans_d;

endmodule
