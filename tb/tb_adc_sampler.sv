// tb_adc_sampler: drives random output levels and random tags each cycle and
// checks that samp and tag_out equal what was present SYNC_STAGES cycles
// earlier, and that reset clears both.
`timescale 1ns/1ps
module tb_adc_sampler;
  import rpu_pkg::*;
  localparam int unsigned N_OUT = 10, SYNC_STAGES = 2;
  logic clk = 1'b0, rst_n;
  logic [N_OUT-1:0] y, samp;
  sample_tag_t tag_in, tag_out;
  logic [N_OUT-1:0] y_hist [$];
  sample_tag_t t_hist [$];
  int checks = 0, failures = 0;

  adc_sampler dut (.clk, .rst_n, .y, .tag_in, .samp, .tag_out);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; y = '1; tag_in = '1;
    repeat (3) @(negedge clk);
    checks++;
    if (samp != '0 || tag_out != '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      y = N_OUT'($urandom()); tag_in = sample_tag_t'($urandom());
      y_hist.push_back(y); t_hist.push_back(tag_in);
      @(negedge clk);
      if (y_hist.size() > SYNC_STAGES) begin
        void'(y_hist.pop_front()); void'(t_hist.pop_front());
      end
      if (n >= SYNC_STAGES - 1) begin
        checks++;
        if (samp != y_hist[0] || tag_out != t_hist[0]) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d samp %h exp %h", n, samp, y_hist[0]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
