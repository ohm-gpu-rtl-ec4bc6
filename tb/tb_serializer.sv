// tb_serializer: self-checking test of the SerDes transmit half.
// Random packets with and without a cache line are loaded; a random grant
// delay follows. Checks: req and dst while waiting, no flit before grant,
// a run of exactly 4 (header only) or 36 (header + line) flits without a
// break, the flits equal to the packet, least significant word first, last
// on the final flit, ready again the clock after.
// The 16-bit flit width is the paper's; the packet format is this design's own.
`timescale 1ns/1ps
module tb_serializer;
  import ohm_pkg::*;
  logic clk = 0, rst_n = 1, load, ready, req, hc_ok, grant, valid, last;
  pkt_t pkt;
  dev_e dst;
  logic [VC_W-1:0] flit;
  int checks = 0, failures = 0;
  always #0.5 clk = !clk;
  serializer dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    fork begin #1000000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    load = 0; grant = 0; pkt = '0;
    #0.2 rst_n = 0; #2 rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      pkt_t p;
      logic [HDR_W+LINE_W-1:0] bitsv;
      int nf, d;
      p.hdr = '{cmd: cmd_e'($urandom_range(1, 8)), src: D_MC, dst: dev_e'($urandom_range(0, 2)),
                id: 8'($urandom), meta: meta_t'($urandom), addr: {8'($urandom), $urandom}};
      for (int i = 0; i < 16; i++) p.data[i*32 +: 32] = $urandom;
      nf = pkt_flits(p.hdr.cmd);
      bitsv = {p.data, p.hdr};
      @(negedge clk);
      chk(ready, "ready when idle");
      load = 1; pkt = p;
      @(negedge clk);
      load = 0;
      d = $urandom_range(0, 5);
      repeat (d) begin
        chk(req && dst == p.hdr.dst && !valid && !ready, "waiting for grant");
        @(negedge clk);
      end
      grant = 1;
      @(negedge clk);
      grant = 0;
      for (int f = 0; f < nf; f++) begin
        chk(valid && flit == bitsv[f*VC_W +: VC_W] && last == (f == nf - 1), $sformatf("flit %0d of %0d", f, nf));
        @(negedge clk);
      end
      chk(!valid && ready, "done after the last flit");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
