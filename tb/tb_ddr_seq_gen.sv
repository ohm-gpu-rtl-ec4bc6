// tb_ddr_seq_gen: self-checking test of the swap sequence generator.
// A swap of 5 lines is started. The test plays the DRAM (answers each XRD with
// RDDATA to the XPoint after a random delay, takes XWR) and the engine's
// internal port (accepts after a random delay, answers reads). Checks: per
// line an XRD of DRAM line base+i, an XPoint read of line base+i, an XWR of
// the XPoint line to DRAM line base+i and an XPoint write of the DRAM line;
// after the swap the two pages are exchanged; busy while working; one done.
// The swap by a sequence generator in the XPoint controller follows the paper;
// the per-line step order checked here is this design's own choice.
`timescale 1ns/1ps
module tb_ddr_seq_gen;
  import ohm_pkg::*;
  localparam int AW = 12, NL = 5;
  logic clk = 0, rst_n = 1, start, busy, done, tx_load, tx_ready, rx_valid;
  logic int_valid, int_we, int_ready, rsp_valid, rsp_int;
  logic [ADDR_W-1:0] dram_addr;
  logic [AW-1:0] xp_addr, int_addr;
  logic [15:0] nlines;
  pkt_t tx_pkt, rx_pkt;
  logic [LINE_W-1:0] int_wdata, rsp_data;
  logic [LINE_W-1:0] dram [NL], xp [NL], dram0 [NL], xp0 [NL];
  int checks = 0, failures = 0, ndone = 0;
  always #0.5 clk = !clk;
  ddr_seq_gen #(.AW(AW)) dut (.*);
  localparam logic [ADDR_W-1:0] DB = 40'h1000;
  localparam logic [AW-1:0] XB = 12'h200;
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  function automatic logic [LINE_W-1:0] rl();
    logic [LINE_W-1:0] d; for (int i = 0; i < 16; i++) d[i*32 +: 32] = $urandom; return d;
  endfunction
  always @(posedge clk) if (done) ndone++;
  // DRAM side
  initial begin
    rx_valid = 0; rx_pkt = '0; tx_ready = 1;
    forever begin
      @(negedge clk);
      if (tx_load) begin
        pkt_t p;
        p = tx_pkt;
        chk(p.hdr.dst == D_DRAM && p.hdr.src == D_XP && p.hdr.addr >= DB && p.hdr.addr < DB + NL, "packet to DRAM page");
        tx_ready = 0;
        if (p.hdr.cmd == C_XRD) begin
          repeat ($urandom_range(2, 20)) @(negedge clk);
          rx_valid = 1; rx_pkt = '0; rx_pkt.hdr.cmd = C_RDDATA; rx_pkt.hdr.src = D_DRAM; rx_pkt.hdr.dst = D_XP;
          rx_pkt.hdr.addr = p.hdr.addr; rx_pkt.data = dram[p.hdr.addr - DB];
          @(negedge clk); rx_valid = 0;
        end else begin
          chk(p.hdr.cmd == C_XWR, "XWR");
          dram[p.hdr.addr - DB] = p.data;
          repeat ($urandom_range(1, 5)) @(negedge clk);
        end
        tx_ready = 1;
      end
    end
  end
  // engine side
  initial begin
    int_ready = 0; rsp_valid = 0; rsp_int = 0; rsp_data = '0;
    forever begin
      @(negedge clk);
      if (int_valid) begin
        logic we; logic [AW-1:0] a; logic [LINE_W-1:0] d;
        repeat ($urandom_range(0, 6)) @(negedge clk);
        we = int_we; a = int_addr; d = int_wdata;
        chk(a >= XB && a < XB + NL, "XPoint line of the page");
        int_ready = 1; @(negedge clk); int_ready = 0;
        if (we) xp[a - XB] = d;
        else begin
          repeat ($urandom_range(3, 15)) @(negedge clk);
          rsp_valid = 1; rsp_int = 1; rsp_data = xp[a - XB];
          @(negedge clk); rsp_valid = 0;
        end
      end
    end
  end
  initial begin
    fork begin #1000000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    start = 0; dram_addr = '0; xp_addr = '0; nlines = '0;
    for (int i = 0; i < NL; i++) begin dram[i] = rl(); xp[i] = rl(); dram0[i] = dram[i]; xp0[i] = xp[i]; end
    #0.2 rst_n = 0; #2 rst_n = 1;
    @(negedge clk); start = 1; dram_addr = DB; xp_addr = XB; nlines = 16'(NL);
    @(negedge clk); start = 0;
    chk(busy, "busy after start");
    while (busy) @(negedge clk);
    repeat (5) @(negedge clk);
    chk(ndone == 1, $sformatf("done pulses %0d", ndone));
    for (int i = 0; i < NL; i++) chk(dram[i] == xp0[i] && xp[i] == dram0[i], $sformatf("line %0d exchanged", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
