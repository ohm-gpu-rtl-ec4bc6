// tb_photonic_rx: self-checking test of the detector model.
// Off: light and reference pass, bits are 0. Full: all light absorbed, a bit is
// 1 when light is present (or above 3/4 of the reference for a half-coupled
// sender). Half: half the light and half the reference go on.
// Combinational block: each case is checked 1 ns after the inputs change.
// The half-coupled example levels follow the paper; the decision threshold it
// checks is this design's own choice.
`timescale 1ns/1ps
module tb_photonic_rx;
  import ohm_pkg::*;
  localparam int W = VC_W;
  logic [W-1:0][LVL_W-1:0] li, ri, lo, ro;
  rx_mode_e mode;
  logic hc;
  logic [W-1:0] bits;
  int checks = 0, failures = 0;
  photonic_rx dut (.light_in(li), .ref_in(ri), .mode, .hc_src(hc), .bits, .light_out(lo), .ref_out(ro));
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    fork begin #100000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    for (int t = 0; t < 600; t++) begin
      for (int i = 0; i < W; i++) begin
        ri[i] = LVL_W'($urandom_range(4, LASER));
        li[i] = $urandom_range(0, 1) ? ri[i] : ($urandom_range(0, 1) ? ri[i] >> 1 : '0);
      end
      mode = rx_mode_e'($urandom_range(0, 2)); hc = 1'($urandom);
      #1;
      for (int i = 0; i < W; i++) begin
        logic eb;
        eb = hc ? (li[i] == ri[i]) : (li[i] != 0);
        unique case (mode)
          RX_OFF:  chk(bits[i] == 0 && lo[i] == li[i] && ro[i] == ri[i], $sformatf("off lane %0d", i));
          RX_FULL: chk(bits[i] == eb && lo[i] == 0, $sformatf("full lane %0d in=%0d ref=%0d hc=%b bit=%b", i, li[i], ri[i], hc, bits[i]));
          default: chk(bits[i] == eb && lo[i] == li[i] >> 1 && ro[i] == ri[i] >> 1,
                       $sformatf("half lane %0d in=%0d ref=%0d hc=%b bit=%b out=%0d", i, li[i], ri[i], hc, bits[i], lo[i]));
        endcase
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
