// tb_lut_config_loader: writes random genomes, loads them and rebuilds each
// LUT's table from the serial lines with a reference shift register. Checks
// every word, that the load takes exactly 32 cycles (0.32 us at 100 MHz, under
// one microsecond), the done pulse, and that a second genome replaces the
// first.
`timescale 1ns/1ps
module tb_lut_config_loader;
  import rpu_pkg::*;
  localparam int unsigned N = DEF_N_LUT, AW = $clog2(N);
  logic clk = 1'b0, rst_n, wr_en, load, busy, done, cfg_ce;
  logic [AW-1:0] wr_addr;
  logic [31:0] wr_data;
  logic [N-1:0] cfg_di;
  logic [31:0] shadow [N];
  logic [31:0] genome [N];
  int checks = 0, failures = 0, ce_cycles;

  lut_config_loader dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .load,
                                      .busy, .done, .cfg_ce, .cfg_di);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (cfg_ce) for (int j = 0; j < N; j++) shadow[j] <= {shadow[j][30:0], cfg_di[j]};
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; wr_en = 0; load = 0; wr_addr = 0; wr_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      for (int j = 0; j < N; j++) begin
        @(negedge clk);
        genome[j] = $urandom();
        wr_en = 1; wr_addr = AW'(j); wr_data = genome[j];
      end
      @(negedge clk);
      wr_en = 0;
      check(!busy && !cfg_ce, "idle before load");
      load = 1;
      @(negedge clk);
      load = 0;
      ce_cycles = 0;
      while (busy) begin
        check(cfg_ce, "cfg_ce follows busy");
        ce_cycles++;
        @(negedge clk);
        if (ce_cycles > 100) break;
      end
      check(ce_cycles == 32, $sformatf("load takes 32 cycles (got %0d)", ce_cycles));
      check(done, "done pulses after the load");
      @(negedge clk);
      check(!done, "done is one cycle");
      for (int j = 0; j < N; j++) check(shadow[j] == genome[j], $sformatf("LUT %0d holds its word", j));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
