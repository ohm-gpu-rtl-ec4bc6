// tb_remap_table: self-checking test of the planar-mode mapping table, on a
// 16-group table. Checks: busy during the one-entry-per-clock clear; member 0
// in DRAM and every other member home in XPoint after reset; a hot pulse (with
// group and swap plan) on the HOT_TH-th access to one XPoint member and not
// earlier; after commit the member is in DRAM and member 0 in its slot; a
// second hot event in that group plans the swap back (slot = dm, new = 0).
// Groups of one DRAM and eight XPoint pages follow the paper; the hot threshold
// of 4 accesses is this design's own choice.
`timescale 1ns/1ps
module tb_remap_table;
  localparam int G_W = 4, HOT_TH = 4;
  logic clk = 0, rst_n = 1, busy, in_dram, access, hot, commit;
  logic [G_W-1:0] grp, hot_grp, commit_grp;
  logic [3:0] member, xp_slot, swap_slot, swap_new, commit_new;
  int checks = 0, failures = 0;
  always #0.5 clk = !clk;
  remap_table #(.G_W(G_W), .M(8), .HOT_TH(HOT_TH)) dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  task automatic touch(input int g, input int m, input bit expect_hot);
    @(negedge clk); grp = G_W'(g); member = 4'(m); access = 1;
    @(negedge clk); access = 0;
    chk(hot == expect_hot, $sformatf("hot=%b after access g%0d m%0d", hot, g, m));
  endtask
  initial begin
    fork begin #1000000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    access = 0; commit = 0; grp = '0; member = '0; commit_grp = '0; commit_new = '0;
    #0.2 rst_n = 0; #2 rst_n = 1;
    @(negedge clk); chk(busy, "busy while clearing");
    repeat (2 ** G_W + 2) @(negedge clk);
    chk(!busy, "clear finished");
    for (int g = 0; g < 2 ** G_W; g++) for (int m = 0; m <= 8; m++) begin
      grp = G_W'(g); member = 4'(m); #0.1;
      chk(in_dram == (m == 0) && (m == 0 || xp_slot == 4'(m)), $sformatf("reset map g%0d m%0d", g, m));
    end
    for (int g = 1; g < 4; g++) begin
      int m;
      m = $urandom_range(1, 8);
      touch(g, 0, 0);                       // DRAM accesses do not count
      for (int k = 1; k < HOT_TH; k++) touch(g, m, 0);
      touch(g, m, 1);
      chk(hot_grp == G_W'(g) && swap_slot == 4'(m) && swap_new == 4'(m), "swap plan in");
      @(negedge clk); commit = 1; commit_grp = G_W'(g); commit_new = 4'(m);
      @(negedge clk); commit = 0;
      grp = G_W'(g); member = 4'(m); #0.1;
      chk(in_dram, "member in DRAM after commit");
      member = 0; #0.1;
      chk(!in_dram && xp_slot == 4'(m), "member 0 in the freed slot");
      begin
        int m2;
        m2 = (m % 8) + 1;
        for (int k = 1; k < HOT_TH; k++) touch(g, m2, 0);
        touch(g, m2, 1);
        chk(swap_slot == 4'(m) && swap_new == 4'd0, "swap plan back first");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
