// tb_rpu_top: end-to-end test of the RPU at its default sizes (100 LUTs,
// 32 inputs, 10 outputs, 32 samples per vector, batches of 2000 vectors).
//
// A. Known-logic genome: input LUTs copy their input bit, the other hidden
//    LUTs are random constants, each output LUT copies one pin fed by a
//    non-output LUT. A full batch of 2000 random vectors is run at 32 cycles
//    per vector (3.125 MHz). Every capture record and readout word is
//    compared with values worked out from the topology, and the run must take
//    exactly 2000*32 + 4 cycles from start to done.
// B. Mode switch: the same genome at 16 cycles per vector (the N-back rate).
// C. Interlocks: a run request during a genome load and a load request during
//    a run are both ignored.
// D. Random genome, as the first generation of an evolution would use: the
//    network now has live recurrent dynamics (NV_D vectors; the simulation
//    of the oscillating network dominates the run time). For every vector the readout
//    (ones, transitions, class) must agree with the raw capture record, and
//    some outputs must toggle within a presentation.
// E. A child genome made on the "host" side (per-LUT crossover of the
//    genomes of A and D, then bit-flip mutation) is loaded and run, and its
//    results are checked against its capture records as in D (NV_E vectors).
// tb_rpu_top_full runs the same sequence with full batches in D and E.
// Each mechanism is counted; one that never happened is a failure.
`timescale 1ns/1ps
module tb_rpu_top
  import rpu_pkg::*;
#(
  parameter int NV_D = 200,   // vectors run with the random genome (D)
  parameter int NV_E = 100    // vectors run with the child genome (E)
);
  localparam int unsigned N_LUT = DEF_N_LUT, N_IN = DEF_N_IN, N_OUT = DEF_N_OUT;
  localparam int unsigned SAMPLES = DEF_SAMPLES, DEPTH = DEF_BATCH;
  localparam logic [31:0] SEED = DEF_SEED;
  localparam int unsigned LAW = $clog2(N_LUT), AW = $clog2(DEPTH);
  localparam int unsigned REC_W = N_OUT * SAMPLES, CW = $clog2(SAMPLES + 1);
  localparam int unsigned CLS_W = $clog2(N_OUT), RES_W = CLS_W + 2 * N_OUT * CW;

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
  always #5 clk = ~clk;   // 100 MHz

  logic [31:0] genome [N_LUT];
  logic [31:0] genome_a [N_LUT];
  logic [31:0] genome_d [N_LUT];
  logic [N_IN-1:0] vecs [DEPTH];
  int sel_pin [N_LUT];
  bit cval [N_LUT];
  int checks = 0, failures = 0;
  int n_loads = 0, n_runs = 0, n_hold32 = 0, n_hold16 = 0, n_run_blocked = 0, n_load_blocked = 0;
  int n_toggling = 0, n_child = 0;
  int class_seen [N_OUT];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] copy_pin(input int p);
    logic [31:0] t;
    for (int a = 0; a < 32; a++) t[a] = (a >> p) & 1;
    return t;
  endfunction

  task automatic write_genome();
    for (int j = 0; j < int'(N_LUT); j++) begin
      @(negedge clk);
      cfg_wr_en = 1; cfg_wr_addr = LAW'(j); cfg_wr_data = genome[j];
    end
    @(negedge clk);
    cfg_wr_en = 0;
  endtask

  task automatic load_genome();
    int c;
    cfg_load = 1;
    @(negedge clk);
    cfg_load = 0;
    c = 0;
    while (cfg_busy && c < 100) begin @(negedge clk); c++; end
    check(c == 32, $sformatf("genome load takes 32 cycles (got %0d)", c));
    n_loads++;
  endtask

  task automatic write_batch(input int n);
    for (int v = 0; v < n; v++) begin
      @(negedge clk);
      vecs[v] = N_IN'({$urandom(), $urandom()});
      in_wr_en = 1; in_wr_addr = AW'(v); in_wr_data = vecs[v];
    end
    @(negedge clk);
    in_wr_en = 0;
  endtask

  task automatic run_batch(input int n, input int h);
    int c;
    run_start = 1; run_num_vec = VEC_W'(n); run_hold = PHASE_W'(h);
    @(negedge clk);
    run_start = 0;
    c = 0;
    while (!run_done && c < n * h + 100) begin @(negedge clk); c++; end
    // 3 cycles to the first vector, n*h cycles of presentation, 2 synchronizer
    // stages, 1 cycle for the done flag, minus the cycle in which start is taken
    check(c == n * h + 4, $sformatf("run of %0d x %0d cycles took %0d", n, h, c));
    check(!run_busy, "run_busy low after done");
    n_runs++;
    if (h == 32) n_hold32++;
    if (h == 16) n_hold16++;
  endtask

  task automatic read_vec(input int v, output logic [REC_W-1:0] rec, output logic [RES_W-1:0] res);
    cap_rd_addr = AW'(v); res_rd_addr = AW'(v);
    @(negedge clk);
    rec = cap_rd_data; res = res_rd_data;
  endtask

  function automatic bit node_value(input int s, input logic [N_IN-1:0] x);
    if (s < int'(N_IN)) return x[s];
    return cval[s];
  endfunction

  // A/B: every sample is known
  task automatic check_known(input int n, input int h);
    logic [REC_W-1:0] rec, erec;
    logic [RES_W-1:0] res, eres;
    logic [N_OUT-1:0] e;
    logic [N_OUT-1:0][CW-1:0] eones;
    int cls;
    for (int v = 0; v < n; v++) begin
      for (int o = 0; o < int'(N_OUT); o++) begin
        int j;
        j = N_LUT - N_OUT + o;
        e[o] = (sel_pin[j] < 0) ? 1'b0 : node_value(src_lut(SEED, j, sel_pin[j], N_LUT), vecs[v]);
      end
      erec = '0;
      cls = -1;
      for (int o = 0; o < int'(N_OUT); o++) begin
        for (int p = 0; p < h; p++) erec[o*SAMPLES + p] = e[o];
        eones[o] = e[o] ? CW'(h) : '0;
        if (e[o] && cls < 0) cls = o;
      end
      if (cls < 0) cls = 0;
      eres = {CLS_W'(cls), eones, {(N_OUT*CW){1'b0}}};
      read_vec(v, rec, res);
      check(rec == erec, $sformatf("capture record of vector %0d", v));
      check(res == eres, $sformatf("readout of vector %0d", v));
      class_seen[cls]++;
    end
  endtask

  // D/E: readout must agree with the raw samples
  task automatic check_consistent(input int n, input int h);
    logic [REC_W-1:0] rec;
    logic [RES_W-1:0] res;
    int ones, tr, best, cls, any_tr;
    for (int v = 0; v < n; v++) begin
      read_vec(v, rec, res);
      best = -1; cls = 0; any_tr = 0;
      for (int o = 0; o < int'(N_OUT); o++) begin
        ones = 0; tr = 0;
        for (int p = 0; p < h; p++) begin
          ones += rec[o*SAMPLES + p];
          if (p > 0 && rec[o*SAMPLES + p] != rec[o*SAMPLES + p - 1]) tr++;
        end
        if (ones > best) begin best = ones; cls = o; end
        check(int'(res[(N_OUT + o)*CW +: CW]) == ones, $sformatf("ones v%0d o%0d", v, o));
        check(int'(res[o*CW +: CW]) == tr, $sformatf("transitions v%0d o%0d", v, o));
        if (tr > 0) any_tr = 1;
      end
      check(int'(res[RES_W-1 -: CLS_W]) == cls, $sformatf("class v%0d", v));
      n_toggling += any_tr;
    end
  endtask

  initial begin
    int nv;
    nv = DEPTH;
    rst_n = 0; cfg_wr_en = 0; cfg_load = 0; cfg_wr_addr = 0; cfg_wr_data = 0;
    in_wr_en = 0; in_wr_addr = 0; in_wr_data = 0; run_start = 0; run_num_vec = 0; run_hold = 0;
    cap_rd_addr = 0; res_rd_addr = 0;
    foreach (class_seen[k]) class_seen[k] = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;

    // A. known-logic genome, full batch at 32 cycles per vector
    for (int j = 0; j < int'(N_LUT); j++) begin
      sel_pin[j] = -1;
      cval[j] = $urandom_range(1);
      if (j < int'(N_IN)) genome[j] = copy_pin(0);
      else if (j < int'(N_LUT - N_OUT)) genome[j] = {32{cval[j]}};
      else begin
        genome[j] = '0;
        for (int p = int'(LUT_K) - 1; p >= 0; p--)
          if (src_lut(SEED, j, p, N_LUT) < N_LUT - N_OUT) sel_pin[j] = p;
        if (sel_pin[j] >= 0) genome[j] = copy_pin(sel_pin[j]);
      end
      genome_a[j] = genome[j];
    end
    write_genome();
    load_genome();
    write_batch(nv);
    run_batch(nv, 32);
    check_known(nv, 32);

    // B. mode switch: 16 cycles per vector
    write_batch(300);
    run_batch(300, 16);
    check_known(300, 16);

    // C. interlocks
    cfg_load = 1;
    @(negedge clk);
    cfg_load = 0;
    run_start = 1; run_num_vec = 5; run_hold = 32;
    @(negedge clk);
    run_start = 0;
    check(cfg_busy && !run_busy, "run request during a load is ignored");
    if (cfg_busy && !run_busy) n_run_blocked++;
    while (cfg_busy) @(negedge clk);
    n_loads++;
    run_start = 1;
    @(negedge clk);
    run_start = 0;
    cfg_load = 1;
    @(negedge clk);
    cfg_load = 0;
    check(run_busy && !cfg_busy, "load request during a run is ignored");
    if (run_busy && !cfg_busy) n_load_blocked++;
    while (!run_done) @(negedge clk);
    check_known(5, 32);   // genome A is still in place
    n_runs++;

    // D. random genome
    for (int j = 0; j < int'(N_LUT); j++) begin genome[j] = $urandom(); genome_d[j] = genome[j]; end
    write_genome();
    load_genome();
    write_batch(NV_D);
    run_batch(NV_D, 32);
    check_consistent(NV_D, 32);

    // E. child of A and D: per-LUT crossover, then bit-flip mutation
    for (int j = 0; j < int'(N_LUT); j++) begin
      genome[j] = $urandom_range(1) ? genome_a[j] : genome_d[j];
      for (int b = 0; b < 32; b++) if ($urandom_range(9999) < 33) genome[j][b] = !genome[j][b];
    end
    write_genome();
    load_genome();
    run_batch(NV_E, 32);
    check_consistent(NV_E, 32);
    n_child++;

    $display("mechanisms: loads=%0d runs=%0d hold32=%0d hold16=%0d run_blocked=%0d load_blocked=%0d toggling_vectors=%0d child=%0d",
             n_loads, n_runs, n_hold32, n_hold16, n_run_blocked, n_load_blocked, n_toggling, n_child);
    check(n_loads > 0 && n_runs > 0 && n_hold32 > 0 && n_hold16 > 0, "load, run and both rates exercised");
    check(n_run_blocked > 0 && n_load_blocked > 0, "both interlocks exercised");
    check(n_toggling > 0, "recurrent dynamics made outputs toggle within a presentation");
    check(n_child > 0, "child genome evaluated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
