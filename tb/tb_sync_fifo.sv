// tb_sync_fifo: self-checking test of the I/O buffer FIFO.
// Random pushes and pops (never into a full or out of an empty FIFO) against a
// queue model: first-word fall-through data, count, full and empty, and that
// a pushed word is visible at the head one clock after the push.
// A plain FIFO; the paper only gives buffer sizes, not their design.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int WIDTH = 40, DEPTH = 8;
  logic clk = 0, rst_n = 1, push, pop, full, empty;
  logic [WIDTH-1:0] din, dout;
  logic [$clog2(DEPTH):0] count;
  logic [WIDTH-1:0] q[$];
  int checks = 0, failures = 0;
  always #0.5 clk = !clk;
  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  initial begin
    fork begin #100000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    push = 0; pop = 0; din = '0;
    #0.2 rst_n = 0; #2 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++;
      if (count != q.size() || empty != (q.size() == 0) || full != (q.size() == DEPTH)
          || (q.size() != 0 && dout != q[0])) begin
        failures++; $display("FAIL: t=%0d count %0d model %0d", t, count, q.size());
      end
      push = (t % 700 < 350) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      pop  = $urandom_range(0, 1);
      if (q.size() == DEPTH) push = 0;
      if (q.size() == 0) pop = 0;
      din = {$urandom, 8'($urandom)};
      @(posedge clk); #0.1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
