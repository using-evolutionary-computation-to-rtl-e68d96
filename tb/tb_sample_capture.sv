// tb_sample_capture: feeds tagged random samples for several vectors and hold
// lengths (32 and 16), with idle gaps, and checks each record written against
// a reference built sample by sample: one write per vector, at the vector's
// index, bit o*SAMPLES+p = output o at phase p, unused bits 0.
`timescale 1ns/1ps
module tb_sample_capture;
  import rpu_pkg::*;
  localparam int unsigned N_OUT = 10, SAMPLES = 32, DEPTH = 2000, AW = $clog2(DEPTH);
  localparam int unsigned REC_W = N_OUT * SAMPLES;
  logic clk = 1'b0, rst_n, wr_en;
  logic [N_OUT-1:0] samp;
  sample_tag_t tag;
  logic [AW-1:0] wr_addr;
  logic [REC_W-1:0] wr_data, expect_rec;
  int checks = 0, failures = 0, writes;

  sample_capture dut (
    .clk, .rst_n, .samp, .tag, .wr_en, .wr_addr, .wr_data);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic batch(input int n, input int h, input int base);
    for (int v = 0; v < n; v++) begin
      expect_rec = '0;
      for (int p = 0; p < h; p++) begin
        samp = N_OUT'($urandom());
        for (int o = 0; o < N_OUT; o++) expect_rec[o*SAMPLES + p] = samp[o];
        tag = '0;
        tag.valid = 1; tag.first = (p == 0); tag.last = (p == h - 1);
        tag.vec = VEC_W'(base + v); tag.phase = PHASE_W'(p);
        #1;
        if (p == h - 1) begin
          check(wr_en, "write in the last cycle of a vector");
          check(int'(wr_addr) == base + v, "write address is the vector index");
          check(wr_data == expect_rec, $sformatf("record of vector %0d", base + v));
          writes++;
        end else begin
          check(!wr_en, "no write before the last cycle");
        end
        @(negedge clk);
      end
    end
    tag = '0; samp = '1;
    repeat (3) begin #1; check(!wr_en, "no write while idle"); @(negedge clk); end
  endtask

  initial begin
    rst_n = 0; tag = '0; samp = '0; writes = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    batch(6, 32, 0);
    batch(5, 16, 100);
    batch(3, 32, 1990);
    check(writes == 14, "one write per vector");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
