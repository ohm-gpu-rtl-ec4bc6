// tb_start_gap: self-checking test of Start-Gap wear levelling, on a small
// array (16 lines, a gap move every 4 writes) with a media model.
// The test writes random data through the mapping, performs each requested gap
// move on the model (copy line move_src to move_dst), and after every step
// checks that each logical line still reads back its data, that the mapping is
// one-to-one and avoids the gap, that a move is requested exactly every PSI
// writes, and that start advances after a full rotation of the gap.
// Start-Gap itself is named by the paper; the reference model here is the
// published Start-Gap mapping with this design's one spare line.
`timescale 1ns/1ps
module tb_start_gap;
  localparam int AW = 4, PSI = 4;
  localparam longint N = 16;
  logic clk = 0, rst_n = 1, write, move_req, move_done;
  logic [AW-1:0] la;
  logic [AW:0] pa, move_src, move_dst;
  logic [31:0] media [N+1];
  logic [31:0] ref_d [N];
  int checks = 0, failures = 0, writes_since = 0, moves = 0;
  always #0.5 clk = !clk;
  start_gap #(.AW(AW), .N(N), .PSI(PSI)) dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    fork begin #1000000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    write = 0; move_done = 0; la = '0;
    for (int i = 0; i <= N; i++) media[i] = '0;
    for (int i = 0; i < N; i++) ref_d[i] = '0;
    #0.2 rst_n = 0; #2 rst_n = 1;
    for (int t = 0; t < 800; t++) begin
      @(negedge clk);
      if (move_req) begin
        chk(writes_since == PSI, $sformatf("move after %0d writes", writes_since));
        media[move_dst] = media[move_src];
        move_done = 1;
        @(negedge clk);
        move_done = 0; writes_since = 0; moves++;
      end else begin
        int l;
        l = $urandom_range(0, N - 1);
        la = AW'(l); #0.1;
        ref_d[l] = $urandom;
        media[pa] = ref_d[l];
        write = 1;
        @(negedge clk);
        write = 0; writes_since++;
      end
      // whole-map check
      begin
        bit used [N+1];
        for (int i = 0; i <= N; i++) used[i] = 0;
        for (int l = 0; l < N; l++) begin
          la = AW'(l); #0.01;
          chk(pa <= N && !used[pa] && pa != dut.gap, $sformatf("mapping of %0d", l));
          used[pa] = 1;
          chk(media[pa] == ref_d[l], $sformatf("data of line %0d", l));
        end
      end
    end
    chk(moves > 2 * (N + 1) && dut.start != 0, "start advanced after gap rotations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
