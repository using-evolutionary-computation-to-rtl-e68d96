// tb_rpu_readout: feeds tagged samples for many vectors and checks the result
// of each against a reference: ones per output, transitions per output
// (within the window), and the predicted class (largest ones count, lowest
// index on a tie). Streams are biased per output so that classes vary, and
// some vectors are built with ties.
`timescale 1ns/1ps
module tb_rpu_readout;
  import rpu_pkg::*;
  localparam int unsigned N_OUT = 10, SAMPLES = 32;
  localparam int unsigned CW = $clog2(SAMPLES + 1), CLS_W = $clog2(N_OUT);
  logic clk = 1'b0, rst_n;
  logic [N_OUT-1:0] samp;
  sample_tag_t tag;
  logic res_valid;
  logic [VEC_W-1:0] res_vec;
  logic [CLS_W-1:0] res_class;
  logic [N_OUT-1:0][CW-1:0] res_ones, res_trans;
  int checks = 0, failures = 0, results, ties;
  int class_seen [N_OUT];

  rpu_readout dut (
    .clk, .rst_n, .samp, .tag, .res_valid, .res_vec, .res_class, .res_ones, .res_trans);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones [N_OUT], trans [N_OUT], bias [N_OUT];
    logic [N_OUT-1:0] prev;
    int best, cls, h, tie_mode;
    rst_n = 0; tag = '0; samp = '0; results = 0; ties = 0;
    foreach (class_seen[k]) class_seen[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 400; v++) begin
      h = (v % 3 == 2) ? 16 : 32;
      tie_mode = (v % 7 == 0);
      for (int o = 0; o < N_OUT; o++) begin bias[o] = $urandom_range(100); ones[o] = 0; trans[o] = 0; end
      for (int p = 0; p < h; p++) begin
        for (int o = 0; o < N_OUT; o++) samp[o] = ($urandom_range(99) < bias[o]);
        if (tie_mode) samp = {N_OUT{samp[0]}};
        for (int o = 0; o < N_OUT; o++) begin
          ones[o] += samp[o];
          if (p > 0 && samp[o] != prev[o]) trans[o]++;
        end
        prev = samp;
        tag = '0;
        tag.valid = 1; tag.first = (p == 0); tag.last = (p == h - 1);
        tag.vec = VEC_W'(v); tag.phase = PHASE_W'(p);
        #1;
        check(res_valid == (p == h - 1), "result only in the last cycle");
        if (p == h - 1) begin
          best = ones[0]; cls = 0;
          for (int o = 1; o < N_OUT; o++) if (ones[o] > best) begin best = ones[o]; cls = o; end
          for (int o = 0; o < N_OUT; o++) begin
            check(int'(res_ones[o]) == ones[o], $sformatf("ones v%0d o%0d", v, o));
            check(int'(res_trans[o]) == trans[o], $sformatf("transitions v%0d o%0d", v, o));
          end
          check(int'(res_class) == cls, $sformatf("class v%0d got %0d exp %0d", v, res_class, cls));
          check(int'(res_vec) == v, "result vector index");
          class_seen[cls]++;
          if (tie_mode) ties++;
          results++;
        end
        @(negedge clk);
      end
      if (v % 5 == 0) begin tag = '0; samp = '1; repeat (2) @(negedge clk); end
    end
    check(ties > 0, "tie case exercised");
    for (int o = 0; o < N_OUT; o++) check(class_seen[o] > 0, $sformatf("class %0d predicted at least once", o));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
