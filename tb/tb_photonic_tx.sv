// tb_photonic_tx: self-checking test of the modulator model.
// Random light levels and bits: a disabled modulator or a 1 bit passes the
// light, a 0 bit removes it (full coupling) or halves it (half coupling).
// Combinational block: each case is checked 1 ns after the inputs change.
// The half-coupled coding (a 0 halves the light) follows the paper's example.
`timescale 1ns/1ps
module tb_photonic_tx;
  import ohm_pkg::*;
  localparam int W = VC_W;
  logic [W-1:0][LVL_W-1:0] li, lo;
  logic en, hc;
  logic [W-1:0] bits;
  int checks = 0, failures = 0;
  photonic_tx dut (.light_in(li), .en, .hc, .bits, .light_out(lo));
  initial begin
    fork begin #100000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < W; i++) li[i] = LVL_W'($urandom_range(0, LASER));
      en = 1'($urandom); hc = 1'($urandom); bits = W'($urandom);
      #1;
      for (int i = 0; i < W; i++) begin
        logic [LVL_W-1:0] e;
        e = (!en || bits[i]) ? li[i] : (hc ? li[i] >> 1 : '0);
        checks++;
        if (lo[i] != e) begin failures++; $display("FAIL: en=%b hc=%b bit=%b in=%0d out=%0d", en, hc, bits[i], li[i], lo[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
