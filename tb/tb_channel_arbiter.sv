// tb_channel_arbiter: self-checking test of the light arbiter.
// Random request/busy/destination patterns; checks that a grant goes only to a
// requester, that DRAM never shares the light, that the MC and DRAM never
// share the head of the loop, that the XPoint only joins a busy MC as a
// planar-mode overlay on a packet to the XPoint, that DRAM wins over the MC,
// that a lone requester on an idle channel is granted, and the overlay flag.
// Combinational block: each case is checked 1 ns after the inputs change.
// The overlay rule follows the paper's dual route; the fixed priority it checks is
// this design's own choice.
`timescale 1ns/1ps
module tb_channel_arbiter;
  import ohm_pkg::*;
  logic tl, mr, mb, dr, db, xr, xb, mg, dg, xg, ov;
  dev_e md;
  int checks = 0, failures = 0;
  channel_arbiter dut (.two_level(tl), .mc_req(mr), .mc_dst(md), .mc_busy(mb), .dram_req(dr), .dram_busy(db),
    .xp_req(xr), .xp_busy(xb), .mc_grant(mg), .dram_grant(dg), .xp_grant(xg), .overlay(ov));
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    fork begin #100000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    for (int c = 0; c < 2000; c++) begin
      {tl, mr, mb, dr, db, xr, xb} = 7'($urandom);
      md = $urandom_range(0, 1) ? D_XP : D_DRAM;
      if (c < 128) {tl, mr, dr, xr} = c[3:0];
      if (c < 128) {mb, db, xb} = '0;
      #1;
      chk(!(mg && !mr) && !(dg && !dr) && !(xg && !xr), "grant without request");
      chk(!dg || (!mb && !db && !xb && !mg && !xg), "DRAM shares the light");
      chk(!mg || (!mb && !db && !dr), "MC grant on a busy head or over DRAM");
      chk(!xg || (!xb && !db && (!mb || (!tl && md == D_XP))), "XPoint grant not allowed");
      chk(!(mg && (xb || xg)) || (!tl && md == D_XP), "MC and XPoint together outside the overlay case");
      chk(ov == (xb && mb), "overlay flag");
      if (!mb && !db && !xb) begin
        if (dr) chk(dg, "idle channel, DRAM not granted");
        else if (mr && !xr) chk(mg, "idle channel, lone MC not granted");
        else if (xr && !mr) chk(xg, "idle channel, lone XPoint not granted");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
