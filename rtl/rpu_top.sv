// rpu_top: the FPGA side of an evolvable recurrent processing unit (RPU).
//
// A network of reconfigurable LUTs runs unclocked; its behaviour is set by the
// LUT truth tables (the genome), which a host rewrites between evaluations.
// One evaluation of one genome is:
//   1. write the genome (cfg_wr_*, one 32-bit truth table per LUT) and pulse
//      cfg_load; 32 cycles later (cfg_busy low) the network runs it;
//   2. write a batch of up to DEPTH input vectors (in_wr_*);
//   3. pulse run_start with run_num_vec and run_hold (cycles per vector:
//      32 = 3.125 MHz for image classification, 16 for N-back); each vector
//      is held on the network inputs for run_hold cycles while the N_OUT
//      output LUTs are sampled every cycle;
//   4. after run_done, read per vector the raw 320-bit sample record
//      (cap_rd_*, for a back-end classifier) and the readout word (res_rd_*):
//      {class, ones count per output, transition count per output}.
// The host scores the genome from these and breeds the next generation.
//
// Clocking: one clock (100 MHz in the paper's set-up) drives configuration,
// sequencing, sampling and buffers; the reservoir itself has no clock.
// Reset is synchronous, active low. cfg_load is ignored while a run is busy
// and run_start while a load or a run is busy, so a genome never changes in
// the middle of a batch. A result is written SYNC_STAGES+1 cycles after the
// last cycle of its vector; run_done pulses one cycle after the last write.
//
// Lint and synthesis see combinational loops through u_res: they are the
// unclocked network itself (see reservoir) and are intended.
//
// The sizes, rates and topology rules are the paper's; the host port, the
// on-chip buffers and the on-chip readout are this design's choices (the
// paper moves all samples to the host).
`timescale 1ns/1ps
module rpu_top
  import rpu_pkg::*;
#(
  parameter int unsigned N_LUT       = rpu_pkg::DEF_N_LUT,
  parameter int unsigned N_IN        = rpu_pkg::DEF_N_IN,
  parameter int unsigned N_OUT       = rpu_pkg::DEF_N_OUT,
  parameter int unsigned SAMPLES     = rpu_pkg::DEF_SAMPLES,
  parameter int unsigned DEPTH       = rpu_pkg::DEF_BATCH,
  parameter logic [31:0] SEED        = rpu_pkg::DEF_SEED,
  parameter int unsigned SYNC_STAGES = 2,
  localparam int unsigned LAW        = $clog2(N_LUT),
  localparam int unsigned AW         = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned REC_W      = N_OUT * SAMPLES,
  localparam int unsigned CW         = $clog2(SAMPLES + 1),
  localparam int unsigned CLS_W      = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned RES_W      = CLS_W + 2 * N_OUT * CW
) (
  input  logic                clk,
  input  logic                rst_n,
  // genome
  input  logic                cfg_wr_en,
  input  logic [LAW-1:0]      cfg_wr_addr,
  input  logic [LUT_BITS-1:0] cfg_wr_data,
  input  logic                cfg_load,
  output logic                cfg_busy,
  output logic                cfg_done,
  // input batch
  input  logic                in_wr_en,
  input  logic [AW-1:0]       in_wr_addr,
  input  logic [N_IN-1:0]     in_wr_data,
  // run control
  input  logic                run_start,
  input  logic [VEC_W-1:0]    run_num_vec,
  input  logic [PHASE_W-1:0]  run_hold,
  output logic                run_busy,
  output logic                run_done,
  // results
  input  logic [AW-1:0]       cap_rd_addr,
  output logic [REC_W-1:0]    cap_rd_data,
  input  logic [AW-1:0]       res_rd_addr,
  output logic [RES_W-1:0]    res_rd_data,
  // raw, unclocked LUT outputs, for probing with a scope
  output logic [N_LUT-1:0]    net_node
);

  // ---------------------------------------------------------------- genome
  logic             cfg_ce;
  logic [N_LUT-1:0] cfg_di;

  lut_config_loader #(.N_LUT(N_LUT)) u_loader (
    .clk, .rst_n,
    .wr_en   (cfg_wr_en && !cfg_busy),
    .wr_addr (cfg_wr_addr),
    .wr_data (cfg_wr_data),
    .load    (cfg_load && !run_busy && !cfg_busy),
    .busy    (cfg_busy),
    .done    (cfg_done),
    .cfg_ce  (cfg_ce),
    .cfg_di  (cfg_di)
  );

  // ---------------------------------------------------------------- input path
  logic [AW-1:0]   seq_rd_addr;
  logic [N_IN-1:0] seq_rd_data, x;
  sample_tag_t     tag_x, tag_s;
  wire             start_ok = run_start && !run_busy && !cfg_busy;

  sdp_ram #(.DEPTH(DEPTH), .WIDTH(N_IN)) u_in_buf (
    .clk, .we(in_wr_en), .waddr(in_wr_addr), .wdata(in_wr_data),
    .raddr(seq_rd_addr), .rdata(seq_rd_data)
  );

  input_sequencer #(.N_IN(N_IN), .DEPTH(DEPTH), .MAX_HOLD(SAMPLES)) u_seq (
    .clk, .rst_n,
    .start   (start_ok),
    .num_vec (run_num_vec),
    .hold    (run_hold),
    .rd_addr (seq_rd_addr),
    .rd_data (seq_rd_data),
    .x       (x),
    .tag     (tag_x),
    .busy    (),
    .done    ()
  );

  // ---------------------------------------------------------------- network
  logic [N_OUT-1:0] y;

  reservoir #(.N_LUT(N_LUT), .N_IN(N_IN), .N_OUT(N_OUT), .SEED(SEED)) u_res (
    .cfg_clk (clk),
    .cfg_ce  (cfg_ce),
    .cfg_di  (cfg_di),
    .x       (x),
    .y       (y),
    .node    (net_node)
  );

  // ---------------------------------------------------------------- sampling
  logic [N_OUT-1:0] samp;

  adc_sampler #(.N_OUT(N_OUT), .SYNC_STAGES(SYNC_STAGES)) u_adc (
    .clk, .rst_n, .y(y), .tag_in(tag_x), .samp(samp), .tag_out(tag_s)
  );

  logic             cap_we;
  logic [AW-1:0]    cap_waddr;
  logic [REC_W-1:0] cap_wdata;

  sample_capture #(.N_OUT(N_OUT), .SAMPLES(SAMPLES), .DEPTH(DEPTH)) u_cap (
    .clk, .rst_n, .samp(samp), .tag(tag_s),
    .wr_en(cap_we), .wr_addr(cap_waddr), .wr_data(cap_wdata)
  );

  sdp_ram #(.DEPTH(DEPTH), .WIDTH(REC_W)) u_cap_buf (
    .clk, .we(cap_we), .waddr(cap_waddr), .wdata(cap_wdata),
    .raddr(cap_rd_addr), .rdata(cap_rd_data)
  );

  logic                     res_valid;
  logic [VEC_W-1:0]         res_vec;
  logic [CLS_W-1:0]         res_class;
  logic [N_OUT-1:0][CW-1:0] res_ones, res_trans;

  rpu_readout #(.N_OUT(N_OUT), .SAMPLES(SAMPLES)) u_readout (
    .clk, .rst_n, .samp(samp), .tag(tag_s),
    .res_valid, .res_vec, .res_class, .res_ones, .res_trans
  );

  sdp_ram #(.DEPTH(DEPTH), .WIDTH(RES_W)) u_res_buf (
    .clk, .we(res_valid), .waddr(AW'(res_vec)), .wdata({res_class, res_ones, res_trans}),
    .raddr(res_rd_addr), .rdata(res_rd_data)
  );

  // ---------------------------------------------------------------- run status
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_busy <= 1'b0;
      run_done <= 1'b0;
    end else begin
      run_done <= 1'b0;
      if (start_ok && run_num_vec != '0) run_busy <= 1'b1;
      else if (tag_s.valid && tag_s.final_) begin
        run_busy <= 1'b0;
        run_done <= 1'b1;
      end
    end
  end

  a_no_reconfig_in_run: assert property (@(posedge clk) disable iff (!rst_n) run_busy |-> !cfg_ce)
    else $error("rpu_top: network reconfigured during a run");

endmodule
