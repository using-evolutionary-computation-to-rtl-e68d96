// tb_input_sequencer: runs batches from a small buffer with several hold
// lengths (32 = 3.125 MHz vector rate, 16 = the N-back rate, 1, and an
// out-of-range value that must act as 32). Every presented cycle is checked
// against a reference: x equals the buffered vector, vectors follow in
// order with no gap, each lasts exactly `hold` cycles, and the tag fields
// (vector, phase, first, last, final) are right. Also checks the latency from
// start to the first vector (3 cycles), that hold 1 acts as 2, and the done
// pulse.
`timescale 1ns/1ps
module tb_input_sequencer;
  import rpu_pkg::*;
  localparam int unsigned N_IN = DEF_N_IN, DEPTH = DEF_BATCH, MAX_HOLD = DEF_SAMPLES, AW = $clog2(DEPTH);
  logic clk = 1'b0, rst_n, start, busy, done, we;
  logic [VEC_W-1:0] num_vec;
  logic [PHASE_W-1:0] hold;
  logic [AW-1:0] rd_addr, waddr;
  logic [N_IN-1:0] rd_data, x, wdata;
  sample_tag_t tag;
  logic [N_IN-1:0] vecs [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram #(.DEPTH(DEPTH), .WIDTH(N_IN)) u_mem (.clk, .we, .waddr, .wdata, .raddr(rd_addr), .rdata(rd_data));
  input_sequencer dut (
    .clk, .rst_n, .start, .num_vec, .hold, .rd_addr, .rd_data, .x, .tag, .busy, .done);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n, input int h_in);
    int h, lat;
    h = (h_in == 0 || h_in > MAX_HOLD) ? MAX_HOLD : (h_in == 1) ? 2 : h_in;
    @(negedge clk);
    start = 1; num_vec = VEC_W'(n); hold = PHASE_W'(h_in);
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!tag.valid && lat < 10) begin @(negedge clk); lat++; end
    check(lat == 3, $sformatf("first vector 3 cycles after start (got %0d)", lat));
    for (int v = 0; v < n; v++) begin
      for (int p = 0; p < h; p++) begin
        check(tag.valid, "tag valid during the batch");
        check(x == vecs[v], $sformatf("x is vector %0d", v));
        check(int'(tag.vec) == v && int'(tag.phase) == p, $sformatf("tag v%0d p%0d got v%0d p%0d", v, p, tag.vec, tag.phase));
        check(tag.first == (p == 0), "first flag");
        check(tag.last == (p == h - 1), "last flag");
        check(tag.final_ == (p == h - 1 && v == n - 1), "final flag");
        check(busy, "busy during the batch");
        @(negedge clk);
      end
    end
    check(!tag.valid, "tag idle after the batch");
    check(done, "done after the batch");
    check(x == vecs[n-1], "x keeps the last vector");
    @(negedge clk);
    check(!busy && !done, "idle after done");
  endtask

  initial begin
    rst_n = 0; start = 0; num_vec = 0; hold = 0; we = 0; waddr = 0; wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      vecs[a] = $urandom(); we = 1; waddr = AW'(a); wdata = vecs[a];
    end
    @(negedge clk); we = 0;
    run(5, 32);
    run(7, 16);
    run(3, 1);
    run(1, 4);
    run(DEPTH, 2);
    run(2, 63);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
