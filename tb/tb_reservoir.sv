// tb_reservoir: checks the wiring and reconfiguration of the LUT network.
//
// 1. Topology rules, from the package functions the network is built with:
//    every input bit drives exactly one LUT pin, output LUTs take no input
//    bit, every pin has a source inside the network.
// 2. A configuration that turns the network into known logic: input LUTs
//    copy their input bit, the other non-output LUTs are random constants,
//    and each output LUT copies one pin whose source is not an output LUT.
//    For random inputs every node and every output must then hold the value
//    worked out from the topology; outputs are sampled after settling.
// 3. Reconfiguration in place: the output LUTs become inverters of the same
//    pins and the constants are flipped, and all values must follow.
// 4. Unclocked dynamics: every LUT that has a self-loop is turned into an
//    inverter of that pin. It must then oscillate on its own, with its
//    output toggling once per node delay, while no clock edge occurs.
`timescale 1ns/1ps
module tb_reservoir;
  import rpu_pkg::*;
  localparam int unsigned N_LUT = DEF_N_LUT, N_IN = DEF_N_IN, N_OUT = DEF_N_OUT;
  localparam logic [31:0] SEED = DEF_SEED;
  logic clk = 1'b0, cfg_ce;
  logic [N_LUT-1:0] cfg_di, node;
  logic [N_IN-1:0] x;
  logic [N_OUT-1:0] y;
  logic [31:0] tbl [N_LUT];
  int sel_pin [N_LUT];
  bit cval [N_LUT];
  int checks = 0, failures = 0;

  reservoir dut (
    .cfg_clk(clk), .cfg_ce, .cfg_di, .x, .y, .node);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #2ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] copy_pin(input int p, input bit invert);
    logic [31:0] t;
    for (int a = 0; a < 32; a++) t[a] = ((a >> p) & 1) ^ invert;
    return t;
  endfunction

  task automatic load_all();
    for (int b = 31; b >= 0; b--) begin
      @(negedge clk);
      cfg_ce = 1'b1;
      for (int j = 0; j < N_LUT; j++) cfg_di[j] = tbl[j][b];
    end
    @(negedge clk);
    cfg_ce = 1'b0;
  endtask

  function automatic bit node_value(input int s);
    if (s < int'(N_IN)) return x[s];
    return cval[s];
  endfunction

  task automatic check_values(input bit invert_out);
    for (int n = 0; n < 200; n++) begin
      x = N_IN'({$urandom(), $urandom()});
      #20ns;
      for (int j = 0; j < int'(N_LUT - N_OUT); j++)
        check(node[j] == node_value(j), $sformatf("node %0d", j));
      for (int o = 0; o < int'(N_OUT); o++) begin
        int j;
        bit e;
        j = N_LUT - N_OUT + o;
        if (sel_pin[j] < 0) e = 1'b0;
        else e = node_value(src_lut(SEED, j, sel_pin[j], N_LUT)) ^ invert_out;
        check(y[o] == e, $sformatf("output %0d", o));
        check(node[j] == y[o], "y is the last N_OUT nodes");
      end
    end
  endtask

  initial begin
    int cnt;
    cfg_ce = 0; cfg_di = '0; x = '0;
    // 1. topology rules
    for (int k = 0; k < int'(N_IN); k++) begin
      cnt = 0;
      for (int j = 0; j < int'(N_LUT); j++)
        for (int p = 0; p < int'(LUT_K); p++)
          if (pin_is_input(j, p, N_IN) && j == k) cnt++;
      check(cnt == 1, $sformatf("input %0d drives exactly one LUT", k));
    end
    for (int j = 0; j < int'(N_LUT); j++)
      for (int p = 0; p < int'(LUT_K); p++) begin
        if (j >= int'(N_LUT - N_OUT)) check(!pin_is_input(j, p, N_IN), "output LUT has no input bit");
        if (!pin_is_input(j, p, N_IN)) check(src_lut(SEED, j, p, N_LUT) < N_LUT, "pin source inside the network");
      end
    // 2. known logic
    for (int j = 0; j < int'(N_LUT); j++) begin
      sel_pin[j] = -1;
      cval[j] = $urandom_range(1);
      if (j < int'(N_IN)) tbl[j] = copy_pin(0, 1'b0);
      else if (j < int'(N_LUT - N_OUT)) tbl[j] = {32{cval[j]}};
      else begin
        tbl[j] = '0;
        for (int p = int'(LUT_K) - 1; p >= 0; p--)
          if (src_lut(SEED, j, p, N_LUT) < N_LUT - N_OUT) sel_pin[j] = p;
        if (sel_pin[j] >= 0) tbl[j] = copy_pin(sel_pin[j], 1'b0);
      end
    end
    load_all();
    check_values(1'b0);
    // 3. reconfigure: invert outputs and constants
    for (int j = int'(N_IN); j < int'(N_LUT); j++) begin
      if (j < int'(N_LUT - N_OUT)) begin cval[j] = !cval[j]; tbl[j] = {32{cval[j]}}; end
      else if (sel_pin[j] >= 0) tbl[j] = copy_pin(sel_pin[j], 1'b1);
    end
    load_all();
    check_values(1'b1);
    // 4. self-loop oscillators
    cnt = 0;
    for (int j = int'(N_IN); j < int'(N_LUT); j++)
      for (int p = 0; p < int'(LUT_K); p++)
        if (src_lut(SEED, j, p, N_LUT) == j) begin
          for (int a = 0; a < 32; a++) tbl[j][a] = !((a >> p) & 1);
          sel_pin[j] = -2 - p;   // mark as oscillator
        end
    load_all();
    #3ns;
    for (int j = 0; j < int'(N_LUT); j++) begin
      if (sel_pin[j] <= -2) begin
        realtime t0, t1, t2;
        @(node[j]); t0 = $realtime;
        @(node[j]); t1 = $realtime;
        @(node[j]); t2 = $realtime;
        check(int'((t1 - t0) * 1000.0) == int'(node_delay_ps(SEED, j)),
              $sformatf("LUT %0d toggles every %0d ps (%f %f %f)", j, node_delay_ps(SEED, j), t0, t1, t2));
        check(int'((t2 - t1) * 1000.0) == int'(node_delay_ps(SEED, j)),
              $sformatf("LUT %0d keeps oscillating", j));
        cnt++;
      end
    end
    check(cnt > 0, "at least one self-loop oscillator");
    $display("self-loop oscillators checked: %0d", cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
