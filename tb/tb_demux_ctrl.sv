// tb_demux_ctrl: self-checking test of the detector selection.
// Walks every combination of mode, sender activity, destinations and monitor
// enable and compares with the routing rules: the addressed device's detector
// is on; in two-level mode the XPoint snarfs MC -> DRAM requests and DRAM -> MC
// answers with a half-coupled detector and DRAM's forward detector is half;
// in planar mode the MC modulates half-coupled and XPoint detects it half; the
// reverse write is seen by DRAM (half) and the MC monitor.
// Combinational block: each case is checked 1 ns after the inputs change.
// Enabling only the addressed device's detector follows the paper; the per-mode
// half-coupling table it checks is this design's reading of the paper.
`timescale 1ns/1ps
module tb_demux_ctrl;
  import ohm_pkg::*;
  logic tl, ma, da, xa, mon, mc_hc;
  dev_e md, dd, xd, s0, s1, s2, s3;
  rx_mode_e m0, m1, m2, m3;
  int checks = 0, failures = 0;
  demux_ctrl dut (.two_level(tl), .mc_act(ma), .mc_dst(md), .dram_act(da), .dram_dst(dd), .xp_act(xa), .xp_dst(xd),
    .mon_en(mon), .mc_hc, .dram_rxf_mode(m0), .dram_rxf_src(s0), .xp_rxf_mode(m1), .xp_rxf_src(s1),
    .dram_rxb_mode(m2), .dram_rxb_src(s2), .mc_rx_mode(m3), .mc_rx_src(s3));
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s (tl=%b ma=%b md=%0d da=%b dd=%0d xa=%b xd=%0d mon=%b)", s, tl, ma, md, da, dd, xa, xd, mon); end
  endtask
  initial begin
    fork begin #100000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    for (int c = 0; c < 1024; c++) begin
      {tl, ma, da, xa, mon} = c[4:0];
      md = dev_e'(c[6:5]); dd = dev_e'(c[8:7]); xd = dev_e'({c[9], ~c[9]});
      #1;
      chk(mc_hc == !tl, "mc_hc");
      // DRAM forward detector
      if (ma && md == D_DRAM) chk(s0 == D_MC && m0 == (tl ? RX_HALF : RX_FULL), "DRAM fwd hears MC");
      else chk(m0 == RX_OFF, "DRAM fwd off");
      // XPoint forward detector
      if (ma && md == D_XP) chk(s1 == D_MC && m1 == (tl ? RX_FULL : RX_HALF), "XPoint hears MC");
      else if (tl && ma && md == D_DRAM) chk(s1 == D_MC && m1 == RX_HALF, "XPoint snarfs MC request");
      else if (da && dd == D_XP) chk(s1 == D_DRAM && m1 == RX_FULL, "XPoint hears DRAM");
      else if (tl && da && dd == D_MC) chk(s1 == D_DRAM && m1 == RX_HALF, "XPoint snarfs DRAM answer");
      else chk(m1 == RX_OFF, "XPoint fwd off");
      // DRAM backward detector
      if (xa && xd == D_DRAM) chk(s2 == D_XP && m2 == ((tl && mon) ? RX_HALF : RX_FULL), "DRAM hears XPoint");
      else chk(m2 == RX_OFF, "DRAM bwd off");
      // MC detector
      if (da && dd == D_MC) chk(s3 == D_DRAM && m3 == RX_FULL, "MC hears DRAM");
      else if (xa && (xd == D_MC || (xd == D_DRAM && tl && mon))) chk(s3 == D_XP && m3 == RX_FULL, "MC hears XPoint");
      else chk(m3 == RX_OFF, "MC off");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
