// tb_rpu_top_full: the end-to-end sequence of tb_rpu_top with full batches
// of 2000 vectors in every phase that runs a batch of the main workload
// (known-logic genome, random genome) and 500 vectors for the child genome.
// The design itself keeps all its default sizes. Takes a few minutes, because
// the random-genome network oscillates and every edge is simulated.
`timescale 1ns/1ps
module tb_rpu_top_full;
  tb_rpu_top #(.NV_D(2000), .NV_E(500)) u_tb ();
endmodule
