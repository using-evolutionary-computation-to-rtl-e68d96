// tb_workload_d2f: the digital-to-frequency task on a 24-LUT network with 4
// inputs and 1 output. A random genome (as in a first generation) is loaded,
// the numbers 0..15 are shown in random order, each for REPEAT consecutive
// 32-cycle vectors, and the transitions of the output are summed per number.
// The host-side fitness, the Pearson correlation between number and
// transition rate, is computed and printed. Checked: every readout word
// agrees with its raw capture record, the run takes the expected number of
// cycles, and the correlation is a valid value (or the output never moved).
// An evolved genome would be needed to reach a high correlation; this test
// exercises the data path of the task.
`timescale 1ns/1ps
module tb_workload_d2f;
  import rpu_pkg::*;
  localparam int unsigned N_LUT = 24, N_IN = 4, N_OUT = 1, SAMPLES = 32, DEPTH = 2000;
  localparam int unsigned LAW = $clog2(N_LUT), AW = $clog2(DEPTH);
  localparam int unsigned REC_W = N_OUT * SAMPLES, CW = $clog2(SAMPLES + 1);
  localparam int unsigned CLS_W = 1, RES_W = CLS_W + 2 * N_OUT * CW;
  localparam int REPEAT = 4;

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

  rpu_top #(.N_LUT(N_LUT), .N_IN(N_IN), .N_OUT(N_OUT)) dut (
    .clk, .rst_n,
    .cfg_wr_en, .cfg_wr_addr, .cfg_wr_data, .cfg_load, .cfg_busy, .cfg_done,
    .in_wr_en, .in_wr_addr, .in_wr_data,
    .run_start, .run_num_vec, .run_hold, .run_busy, .run_done,
    .cap_rd_addr, .cap_rd_data, .res_rd_addr, .res_rd_data, .net_node
  );
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int order [16];
  int trans_sum [16];

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
    int c, n, ones, tr, t;
    real mx, my, sxy, sxx, syy, r;
    rst_n = 0; cfg_wr_en = 0; cfg_load = 0; cfg_wr_addr = 0; cfg_wr_data = 0;
    in_wr_en = 0; in_wr_addr = 0; in_wr_data = 0; run_start = 0; run_num_vec = 0; run_hold = 0;
    cap_rd_addr = 0; res_rd_addr = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // random genome
    for (int j = 0; j < int'(N_LUT); j++) begin
      @(negedge clk);
      cfg_wr_en = 1; cfg_wr_addr = LAW'(j); cfg_wr_data = $urandom();
    end
    @(negedge clk); cfg_wr_en = 0; cfg_load = 1;
    @(negedge clk); cfg_load = 0;
    while (cfg_busy) @(negedge clk);
    // numbers 0..15 in random order, MSb on input bit 3
    foreach (order[k]) order[k] = k;
    order.shuffle();
    n = 16 * REPEAT;
    for (int v = 0; v < n; v++) begin
      @(negedge clk);
      in_wr_en = 1; in_wr_addr = AW'(v); in_wr_data = N_IN'(order[v / REPEAT]);
    end
    @(negedge clk); in_wr_en = 0;
    run_start = 1; run_num_vec = VEC_W'(n); run_hold = 32;
    @(negedge clk); run_start = 0;
    c = 0;
    while (!run_done && c < n * 32 + 100) begin @(negedge clk); c++; end
    check(c == n * 32 + 4, $sformatf("run took %0d cycles", c));
    foreach (trans_sum[k]) trans_sum[k] = 0;
    for (int v = 0; v < n; v++) begin
      cap_rd_addr = AW'(v); res_rd_addr = AW'(v);
      @(negedge clk);
      ones = 0; tr = 0;
      for (int p = 0; p < 32; p++) begin
        ones += cap_rd_data[p];
        if (p > 0 && cap_rd_data[p] != cap_rd_data[p-1]) tr++;
      end
      check(int'(res_rd_data[CW +: CW]) == ones, $sformatf("ones of vector %0d", v));
      t = int'(res_rd_data[0 +: CW]);
      check(t == tr, $sformatf("transitions of vector %0d", v));
      trans_sum[order[v / REPEAT]] += t;
    end
    // Pearson correlation between the number and its transition rate
    mx = 7.5; my = 0;
    foreach (trans_sum[k]) my += trans_sum[k];
    my = my / 16.0;
    sxy = 0; sxx = 0; syy = 0;
    foreach (trans_sum[k]) begin
      sxy += (k - mx) * (trans_sum[k] - my);
      sxx += (k - mx) * (k - mx);
      syy += (trans_sum[k] - my) * (trans_sum[k] - my);
    end
    for (int k = 0; k < 16; k++)
      $display("d2f: input %2d  transitions %3d  rate %.2f MHz", k, trans_sum[k],
               trans_sum[k] / (2.0 * REPEAT * 0.32));
    if (syy > 0) begin
      r = sxy / $sqrt(sxx * syy);
      $display("d2f: fitness (Pearson r) = %.3f", r);
      check(r >= -1.0 && r <= 1.0, "correlation in [-1, 1]");
    end else begin
      $display("d2f: output never toggled, fitness undefined (scored as 0)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
