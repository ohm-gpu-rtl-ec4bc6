// tb_ddr_monitor: self-checking test of the memory controller's DDR monitor.
// Armed with a DRAM line address, it must capture the line of the XPoint's
// reverse write (XWR to DRAM) with that address, ignore other packets, and on
// rwr_done pulse done one clock later with ok and the data; also when the packet
// and rwr_done arrive in the same clock; and ok must be low when no matching
// packet came.
// The snarf of a reverse write follows the paper; the address match it checks is
// this design's own choice.
`timescale 1ns/1ps
module tb_ddr_monitor;
  import ohm_pkg::*;
  logic clk = 0, rst_n = 1, arm, pkt_valid, rwr_done, armed, done, ok;
  logic [ADDR_W-1:0] addr;
  pkt_t pkt;
  logic [LINE_W-1:0] data;
  int checks = 0, failures = 0;
  always #0.5 clk = !clk;
  ddr_monitor dut (.*);
  task automatic chk(input bit ok_, input string s);
    checks++; if (!ok_) begin failures++; $display("FAIL: %s", s); end
  endtask
  function automatic pkt_t mk(input cmd_e c, input logic [ADDR_W-1:0] a);
    pkt_t p;
    p = '0; p.hdr.cmd = c; p.hdr.src = D_XP; p.hdr.dst = D_DRAM; p.hdr.addr = a;
    for (int i = 0; i < 16; i++) p.data[i*32 +: 32] = $urandom;
    return p;
  endfunction
  initial begin
    fork begin #1000000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    arm = 0; pkt_valid = 0; rwr_done = 0; addr = '0; pkt = '0;
    #0.2 rst_n = 0; #2 rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [ADDR_W-1:0] a;
      pkt_t good;
      int mode;
      mode = t % 3;            // 0: packet then rwr_done, 1: same clock, 2: no match
      a = ADDR_W'($urandom);
      good = mk(C_XWR, a);
      @(negedge clk); arm = 1; addr = a;
      @(negedge clk); arm = 0; addr = '0;
      chk(armed, "armed");
      repeat ($urandom_range(0, 3)) @(negedge clk);
      pkt_valid = 1; pkt = mk(C_XWR, a + 1);        // other address
      @(negedge clk); pkt = mk(C_RDDATA, a);        // other command
      @(negedge clk); pkt_valid = 0;
      if (mode == 0) begin
        pkt_valid = 1; pkt = good;
        @(negedge clk); pkt_valid = 0;
        repeat (2) @(negedge clk);
        rwr_done = 1;
      end else if (mode == 1) begin
        pkt_valid = 1; pkt = good; rwr_done = 1;
      end else rwr_done = 1;
      @(negedge clk); rwr_done = 0; pkt_valid = 0;
      chk(done && !armed, "done after rwr_done");
      if (mode != 2) chk(ok && data == good.data, $sformatf("captured line, mode %0d", mode));
      else chk(!ok, "ok without a matching packet");
      @(negedge clk); chk(!done, "done is one pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
