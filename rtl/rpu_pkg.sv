// rpu_pkg: sizes, tag type and topology functions shared by the recurrent
// processing unit (RPU), a network of reconfigurable 5-input LUTs that runs
// unclocked and is trained by rewriting the LUT truth tables.
//
// The default sizes are those of the image-classification set-up: 100 LUTs,
// 32 input bits, 10 output LUTs, 32 samples of each output per input vector
// (one vector every 0.32 us with 100 MHz sampling) and batches of 2000
// vectors. Every sample cycle carries a sample_tag_t that says which vector
// and which phase of its presentation the cycle belongs to.
//
// The network topology is random but fixed. It is drawn at elaboration time
// by pure functions of a seed, so the same seed always yields the same
// network and a testbench can recompute the wiring. The rules come from the
// image-classification set-up: every LUT pin is connected; each input bit
// drives exactly one LUT (LUT j takes input bit j on pin 0); the last N_OUT
// LUTs are the output LUTs and take no input bit. All other pins connect to
// the output of a LUT chosen by a 32-bit hash (self-loops allowed). The hash,
// the pin choice and the LUT numbering are this design's own choices.
// node_delay_ps gives each LUT a fixed propagation delay of 400..1399 ps that
// only the simulator uses; the physical delays come from placement and
// routing.
`timescale 1ns/1ps
package rpu_pkg;

  localparam int unsigned LUT_K     = 5;           // inputs per LUT
  localparam int unsigned LUT_BITS  = 1 << LUT_K;  // truth-table bits per LUT
  localparam int unsigned DEF_N_LUT     = 100;
  localparam int unsigned DEF_N_IN      = 32;
  localparam int unsigned DEF_N_OUT     = 10;
  localparam int unsigned DEF_SAMPLES   = 32;          // samples per vector (max)
  localparam int unsigned DEF_BATCH     = 2000;        // vectors per batch
  localparam logic [31:0] DEF_SEED      = 32'h5EED_0001;

  localparam int unsigned VEC_W     = 16;          // vector index width
  localparam int unsigned PHASE_W   = 6;           // holds 0..32

  // Describes one 100 MHz sample cycle of a batch run.
  typedef struct packed {
    logic               valid;   // a vector is being presented
    logic               first;   // first cycle of this vector
    logic               last;    // last cycle of this vector
    logic               final_;  // last cycle of the whole batch
    logic [VEC_W-1:0]   vec;     // vector index within the batch
    logic [PHASE_W-1:0] phase;   // cycle within the presentation
  } sample_tag_t;

  // 32-bit integer finaliser (MurmurHash3 fmix32).
  function automatic logic [31:0] mix32(input logic [31:0] a);
    logic [31:0] h;
    h = a;
    h = h ^ (h >> 16);
    h = h * 32'h85eb_ca6b;
    h = h ^ (h >> 13);
    h = h * 32'hc2b2_ae35;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // True when pin `pin` of LUT `lut` is driven by network input bit `lut`.
  function automatic bit pin_is_input(input int unsigned lut, input int unsigned pin,
                                      input int unsigned n_in);
    return (pin == 0) && (lut < n_in);
  endfunction

  // LUT whose output drives pin `pin` of LUT `lut` (when not an input pin).
  function automatic int unsigned src_lut(input logic [31:0] seed, input int unsigned lut,
                                          input int unsigned pin, input int unsigned n_lut);
    logic [31:0] h;
    h = mix32(seed ^ mix32(32'(lut * 8 + pin + 1)));
    return int'(h % 32'(n_lut));
  endfunction

  // Simulation-only propagation delay of LUT `lut`, in picoseconds.
  function automatic int unsigned node_delay_ps(input logic [31:0] seed, input int unsigned lut);
    logic [31:0] h;
    h = mix32(seed ^ 32'hA5A5_0000 ^ 32'(lut));
    return 400 + int'(h % 32'd1000);
  endfunction

endpackage
