// tb_optical_vchannel: self-checking test of the light on one virtual channel.
// Cases: plain MC -> DRAM and DRAM -> MC transfers; the planar dual route
// (MC sends half-coupled to XPoint while XPoint sends to MC on the same light);
// the two-level snarf (DRAM and XPoint both decode the MC's packet); the
// reverse write seen by DRAM and MC at once; and the 5-bit example of the
// paper (00110 sent half-coupled, light 1/2 1/2 1 1 1/2, passed on as half).
// Combinational block: each case is checked 1 ns after the inputs change.
`timescale 1ns/1ps
module tb_optical_vchannel;
  import ohm_pkg::*;
  localparam int W = VC_W;
  logic mc_en, mc_hc, dr_en, xp_en;
  logic [W-1:0] mc_b, dr_b, xp_b, drf_b, xpf_b, drb_b, mcr_b;
  rx_mode_e drf_m, xpf_m, drb_m, mcr_m;
  logic drf_h, xpf_h, drb_h, mcr_h;
  logic [W-1:0][LVL_W-1:0] lmc;
  int checks = 0, failures = 0;
  optical_vchannel dut (.mc_tx_en(mc_en), .mc_tx_hc(mc_hc), .mc_tx_bits(mc_b), .dram_tx_en(dr_en), .dram_tx_bits(dr_b),
    .xp_tx_en(xp_en), .xp_tx_bits(xp_b), .dram_rxf_mode(drf_m), .dram_rxf_hc(drf_h), .dram_rxf_bits(drf_b),
    .xp_rxf_mode(xpf_m), .xp_rxf_hc(xpf_h), .xp_rxf_bits(xpf_b), .dram_rxb_mode(drb_m), .dram_rxb_hc(drb_h),
    .dram_rxb_bits(drb_b), .mc_rx_mode(mcr_m), .mc_rx_hc(mcr_h), .mc_rx_bits(mcr_b), .light_at_mc_rx(lmc));
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  task automatic idle();
    mc_en = 0; mc_hc = 0; dr_en = 0; xp_en = 0; mc_b = '0; dr_b = '0; xp_b = '0;
    drf_m = RX_OFF; xpf_m = RX_OFF; drb_m = RX_OFF; mcr_m = RX_OFF; drf_h = 0; xpf_h = 0; drb_h = 0; mcr_h = 0;
  endtask
  initial begin
    fork begin #100000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    for (int t = 0; t < 200; t++) begin
      logic [W-1:0] a, b;
      a = W'($urandom); b = W'($urandom);
      // MC -> DRAM, full
      idle(); mc_en = 1; mc_b = a; drf_m = RX_FULL; #1;
      chk(drf_b == a, "MC->DRAM");
      // DRAM -> MC
      idle(); dr_en = 1; dr_b = a; mcr_m = RX_FULL; #1;
      chk(mcr_b == a, "DRAM->MC");
      // planar dual route: MC half-coupled to XPoint, XPoint to MC
      idle(); mc_en = 1; mc_hc = 1; mc_b = a; xpf_m = RX_HALF; xpf_h = 1; xp_en = 1; xp_b = b; mcr_m = RX_FULL; #1;
      chk(xpf_b == a, $sformatf("overlay XPoint got %h sent %h", xpf_b, a));
      chk(mcr_b == b, $sformatf("overlay MC got %h sent %h", mcr_b, b));
      // two-level snarf: MC full to DRAM, DRAM half detector, XPoint snarfs
      idle(); mc_en = 1; mc_b = a; drf_m = RX_HALF; xpf_m = RX_HALF; #1;
      chk(drf_b == a && xpf_b == a, "snarf of MC packet");
      // two-level snarf of DRAM answer
      idle(); dr_en = 1; dr_b = a; xpf_m = RX_HALF; mcr_m = RX_FULL; #1;
      chk(xpf_b == a && mcr_b == a, "snarf of DRAM answer");
      // reverse write: DRAM half detector, MC monitor
      idle(); xp_en = 1; xp_b = a; drb_m = RX_HALF; mcr_m = RX_FULL; #1;
      chk(drb_b == a && mcr_b == a, "reverse write seen by DRAM and MC");
    end
    // paper example: 00110, half-coupled sender, XPoint half detector, then XPoint modulates 10101
    idle(); mc_en = 1; mc_hc = 1; mc_b = W'(5'b01100); xpf_m = RX_HALF; xpf_h = 1; xp_en = 1; xp_b = W'(5'b10101);
    drb_m = RX_FULL; #1;
    chk(dut.l1[0] == LASER / 2 && dut.l1[2] == LASER && dut.l1[3] == LASER && dut.l1[4] == LASER / 2, "1/2 1/2 1 1 1/2");
    chk(dut.l4[0] == LASER / 4 && dut.l4[2] == LASER / 2, "1/4 1/4 1/2 1/2 1/4");
    chk(xpf_b[4:0] == 5'b01100 && drb_b[4:0] == 5'b10101, "both data words decoded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
