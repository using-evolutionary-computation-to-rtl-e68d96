// tb_workload_nback: the N-back memory task (N = 3) on the default 100-LUT
// network. One input bit (input 0) is shown for 16 samples per bit, the rate
// of the original experiment; the sequence starts with the 17 bits printed
// above the original raster plot (1 0 0 0 0 0 1 1 0 0 1 0 1 0 0 0 1) and
// continues with random bits. The host-side score is the fraction of bits
// k >= 3 for which the output's average over bit k's presentation, rounded,
// equals input bit k-3. Checked: every readout word agrees with its capture
// record, the unused half of each 32-sample record is zero, and the run takes
// the expected number of cycles. A random genome scores near chance; an
// evolved one is needed for the task itself.
`timescale 1ns/1ps
module tb_workload_nback;
  import rpu_pkg::*;
  localparam int unsigned N_LUT = DEF_N_LUT, N_IN = DEF_N_IN, N_OUT = DEF_N_OUT;
  localparam int unsigned SAMPLES = DEF_SAMPLES, DEPTH = DEF_BATCH;
  localparam int unsigned LAW = $clog2(N_LUT), AW = $clog2(DEPTH);
  localparam int unsigned REC_W = N_OUT * SAMPLES, CW = $clog2(SAMPLES + 1);
  localparam int unsigned CLS_W = $clog2(N_OUT), RES_W = CLS_W + 2 * N_OUT * CW;
  localparam int NBITS = 60, NBACK = 3, HOLD = 16;
  localparam bit [16:0] PRINTED = 17'b1_0000_0110_0101_0001; // first bit is the MSB

  logic clk = 1'b0, rst_n;
  logic cfg_wr_en, cfg_load, cfg_busy, cfg_done;
  logic [LAW-1:0] cfg_wr_addr;
  logic [31:0] cfg_wr_data;
  logic in_wr_en;
  logic [AW-1:0] in_wr_addr, cap_rd_addr, res_rd_addr;
  logic [N_IN-1:0] in_wr_data;
  logic run_start, run_busy, run_done;
  logic [VEC_W-1:0] run_num_vec;
  logic [PHASE_W-1:0] run_hold;
  logic [REC_W-1:0] cap_rd_data;
  logic [RES_W-1:0] res_rd_data;
  logic [N_LUT-1:0] net_node;

  rpu_top dut (
    .clk, .rst_n,
    .cfg_wr_en, .cfg_wr_addr, .cfg_wr_data, .cfg_load, .cfg_busy, .cfg_done,
    .in_wr_en, .in_wr_addr, .in_wr_data,
    .run_start, .run_num_vec, .run_hold, .run_busy, .run_done,
    .cap_rd_addr, .cap_rd_data, .res_rd_addr, .res_rd_data, .net_node
  );
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit seq [NBITS];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c, ones, tr, correct;
    string line;
    rst_n = 0; cfg_wr_en = 0; cfg_load = 0; cfg_wr_addr = 0; cfg_wr_data = 0;
    in_wr_en = 0; in_wr_addr = 0; in_wr_data = 0; run_start = 0; run_num_vec = 0; run_hold = 0;
    cap_rd_addr = 0; res_rd_addr = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < int'(N_LUT); j++) begin
      @(negedge clk);
      cfg_wr_en = 1; cfg_wr_addr = LAW'(j); cfg_wr_data = $urandom();
    end
    @(negedge clk); cfg_wr_en = 0; cfg_load = 1;
    @(negedge clk); cfg_load = 0;
    while (cfg_busy) @(negedge clk);
    for (int k = 0; k < NBITS; k++) begin
      seq[k] = (k < 17) ? PRINTED[16 - k] : bit'($urandom_range(1));
      @(negedge clk);
      in_wr_en = 1; in_wr_addr = AW'(k); in_wr_data = N_IN'(seq[k]);
    end
    @(negedge clk); in_wr_en = 0;
    run_start = 1; run_num_vec = VEC_W'(NBITS); run_hold = PHASE_W'(HOLD);
    @(negedge clk); run_start = 0;
    c = 0;
    while (!run_done && c < NBITS * HOLD + 100) begin @(negedge clk); c++; end
    check(c == NBITS * HOLD + 4, $sformatf("run took %0d cycles", c));
    correct = 0;
    line = "";
    for (int k = 0; k < NBITS; k++) begin
      cap_rd_addr = AW'(k); res_rd_addr = AW'(k);
      @(negedge clk);
      for (int o = 0; o < int'(N_OUT); o++) begin
        ones = 0; tr = 0;
        for (int p = 0; p < int'(SAMPLES); p++) begin
          if (p >= HOLD) check(cap_rd_data[o*SAMPLES + p] == 1'b0, "unused record bits are zero");
          else begin
            ones += cap_rd_data[o*SAMPLES + p];
            if (p > 0 && cap_rd_data[o*SAMPLES + p] != cap_rd_data[o*SAMPLES + p - 1]) tr++;
          end
        end
        check(int'(res_rd_data[(N_OUT + o)*CW +: CW]) == ones, $sformatf("ones bit %0d out %0d", k, o));
        check(int'(res_rd_data[o*CW +: CW]) == tr, $sformatf("transitions bit %0d out %0d", k, o));
      end
      ones = int'(res_rd_data[N_OUT*CW +: CW]);   // output LUT 0 is the task output
      line = {line, (2 * ones >= HOLD) ? "1" : "0"};
      if (k >= NBACK && ((2 * ones >= HOLD) == seq[k - NBACK])) correct++;
    end
    $display("nback: output bits %s", line);
    $display("nback: score %0d of %0d bits (N = %0d)", correct, NBITS - NBACK, NBACK);
    check(correct >= 0 && correct <= NBITS - NBACK, "score in range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
