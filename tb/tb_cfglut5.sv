// tb_cfglut5: self-checking test of the reconfigurable LUT node. Shifts random
// truth tables in MSB first, then checks o6 for all 32 addresses, o5 for all
// 16, the bit stream on cdo, that the table holds while ce is low, and that
// the output changes only after the node's propagation delay.
`timescale 1ns/1ps
module tb_cfglut5;
  localparam int unsigned DELAY_PS = 800;
  logic clk = 1'b0, ce, cdi;
  logic [4:0] i;
  logic o6, o5, cdo;
  int checks = 0, failures = 0;

  cfglut5 dut (.clk, .ce, .cdi, .i, .o6, .o5, .cdo);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic load(input logic [31:0] t, input logic [31:0] prev, input bit check_cdo);
    for (int b = 31; b >= 0; b--) begin
      @(negedge clk);
      ce = 1'b1; cdi = t[b];
      if (check_cdo) check(cdo == prev[b], "cdo shifts the old table out MSB first");
    end
    @(negedge clk);
    ce = 1'b0;
  endtask

  initial begin : watchdog
    #200us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] t, prev;
    ce = 1'b0; cdi = 1'b0; i = '0;
    prev = '0;
    load(prev, prev, 1'b0);
    for (int n = 0; n < 20; n++) begin
      t = $urandom();
      load(t, prev, 1'b1);
      for (int a = 0; a < 32; a++) begin
        i = 5'(a);
        #2ns;
        check(o6 == t[a], "o6 = table[i]");
        check(o5 == t[a % 16], "o5 = table[i[3:0]]");
      end
      // hold: clocks without ce must not change the table
      repeat (3) @(negedge clk);
      i = 5'd7;
      #2ns;
      check(o6 == t[7], "table holds while ce is low");
      prev = t;
    end
    // propagation delay: address change is seen only after DELAY_PS
    t = 32'h0000_00F0;
    load(t, prev, 1'b1);
    i = 5'd0;
    #2ns;
    check(o6 == 1'b0, "o6 low at address 0");
    i = 5'd4;
    #((DELAY_PS / 2) * 1ps);
    check(o6 == 1'b0, "o6 not yet changed before the delay");
    #(DELAY_PS * 1ps);
    check(o6 == 1'b1, "o6 changed after the delay");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
