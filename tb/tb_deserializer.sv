// tb_deserializer: self-checking test of the SerDes receive half.
// Random packets are sent as flits (least significant word first, 4 or 36 of
// them); the packet must come out whole with pkt_valid one clock after the
// last flit, and nothing else may be flagged. Every tenth packet is broken off
// in the middle: err must pulse and no packet may come out.
// The 16-bit flit width is the paper's; the packet format is this design's own.
`timescale 1ns/1ps
module tb_deserializer;
  import ohm_pkg::*;
  logic clk = 0, rst_n = 1, valid, pkt_valid, err;
  logic [VC_W-1:0] flit;
  pkt_t pkt;
  int checks = 0, failures = 0;
  always #0.5 clk = !clk;
  deserializer dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    fork begin #1000000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    valid = 0; flit = '0;
    #0.2 rst_n = 0; #2 rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      pkt_t p;
      logic [HDR_W+LINE_W-1:0] bitsv;
      int nf, cut;
      bit seen_err;
      p.hdr = '{cmd: cmd_e'($urandom_range(1, 8)), src: dev_e'($urandom_range(0, 2)), dst: dev_e'($urandom_range(0, 2)),
                id: 8'($urandom), meta: meta_t'($urandom), addr: {8'($urandom), $urandom}};
      p.data = '0;
      if (has_data(p.hdr.cmd)) for (int i = 0; i < 16; i++) p.data[i*32 +: 32] = $urandom;
      nf = pkt_flits(p.hdr.cmd);
      cut = (t % 10 == 9) ? $urandom_range(1, nf - 1) : nf;
      bitsv = {p.data, p.hdr};
      seen_err = 0;
      for (int f = 0; f < cut; f++) begin
        @(negedge clk);
        valid = 1; flit = bitsv[f*VC_W +: VC_W];
        if (f > 0) chk(!pkt_valid && !err, "early output");
      end
      @(negedge clk);
      valid = 0; flit = $urandom;
      if (cut == nf) chk(pkt_valid && pkt == p, $sformatf("packet %0d cmd %0d", t, p.hdr.cmd));
      else begin
        chk(!pkt_valid, "broken packet delivered");
        @(negedge clk);
        chk(err || seen_err, "no error on a broken packet");
      end
      @(negedge clk);
      chk(!pkt_valid, "second output");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
