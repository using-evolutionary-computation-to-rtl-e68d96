// tb_sdp_ram: random writes and reads against a reference array; checks the
// one-cycle read latency and read-old-data on a same-address write.
`timescale 1ns/1ps
module tb_sdp_ram;
  localparam int unsigned DEPTH = 2000, WIDTH = 32, AW = $clog2(DEPTH);
  logic clk = 1'b0, we;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  bit valid [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] expect_q;
    bit expect_v;
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    foreach (valid[k]) valid[k] = 0;
    // fill every word
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = $urandom();
      ref_mem[a] = wdata; valid[a] = 1;
    end
    @(negedge clk); we = 0;
    // random mixed traffic
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      raddr = AW'($urandom_range(DEPTH - 1));
      we = $urandom_range(1);
      waddr = ($urandom_range(3) == 0) ? raddr : AW'($urandom_range(DEPTH - 1));
      wdata = $urandom();
      expect_q = ref_mem[raddr];
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h exp %h", raddr, rdata, expect_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
