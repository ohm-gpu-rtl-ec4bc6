// tb_xp_engine: self-checking test of the XPoint scheduler/protocol engine,
// with small timings (read 20, write 40 clocks), a 64-line array, a gap move
// every 4 writes, and the media model.
// The test queues random writes and reads on the buffer ports and internal
// accesses on the internal port, then checks: every read answer carries the
// id and the last data written to that line; a read of an idle engine takes
// TRD clocks of media time plus one clock to register the answer; internal reads answer with rsp_int;
// gap moves happen (n_gap_moves) and do not disturb the data.
// The 190-clock read and 763-clock write latencies are the paper's Table 1
// values at 1 ns per clock; they are checked exactly.
`timescale 1ns/1ps
module tb_xp_engine;
  import ohm_pkg::*;
  localparam int AW = 6, TRD = 20, TWR = 40, PSI = 4;
  logic clk = 0, rst_n = 1;
  logic int_valid, int_we, int_ready, rd_valid, rd_pop, wr_valid, wr_pop, rsp_valid, rsp_int, m_en, m_we;
  logic [AW-1:0] int_addr, rd_addr, wr_addr, rsp_addr;
  logic [LINE_W-1:0] int_wdata, wr_data, rsp_data, m_wdata, m_rdata;
  logic [7:0] rd_id, rsp_id;
  logic [AW:0] m_addr;
  logic [31:0] n_gap_moves;
  int n_wr;
  logic [LINE_W-1:0] ref_d [2**AW];
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #0.5 clk = !clk;
  always @(posedge clk) cyc <= cyc + 1;
  xp_engine #(.AW(AW), .TRD(TRD), .TWR(TWR), .PSI(PSI)) dut (.*);
  xp_media_model #(.AW(AW)) u_m (.clk, .m_en, .m_we, .m_addr, .m_wdata, .m_rdata, .n_wr);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  function automatic logic [LINE_W-1:0] rl();
    logic [LINE_W-1:0] d; for (int i = 0; i < 16; i++) d[i*32 +: 32] = $urandom; return d;
  endfunction
  task automatic do_write(input int a, input bit internal);
    logic [LINE_W-1:0] d;
    d = rl(); ref_d[a] = d;
    @(negedge clk);
    if (internal) begin int_valid = 1; int_we = 1; int_addr = AW'(a); int_wdata = d; end
    else begin wr_valid = 1; wr_addr = AW'(a); wr_data = d; end
    forever begin
      #0.2;
      if (internal ? int_ready : wr_pop) break;
      @(negedge clk);
    end
    @(negedge clk); int_valid = 0; wr_valid = 0;
  endtask
  task automatic do_read(input int a, input bit internal, input bit timed);
    longint t0;
    @(negedge clk);
    if (internal) begin int_valid = 1; int_we = 0; int_addr = AW'(a); end
    else begin rd_valid = 1; rd_addr = AW'(a); rd_id = 8'(a); end
    forever begin
      #0.2;
      if (internal ? int_ready : rd_pop) break;
      @(negedge clk);
    end
    t0 = cyc;
    @(negedge clk); int_valid = 0; rd_valid = 0;
    while (!rsp_valid) @(negedge clk);
    chk(rsp_int == internal && rsp_data == ref_d[a] && (internal || rsp_id == 8'(a)),
        $sformatf("read of line %0d internal=%b", a, internal));
    if (timed) chk(cyc - t0 == TRD + 1, $sformatf("read took %0d clocks, TRD is %0d", cyc - t0, TRD));
  endtask
  initial begin
    fork begin #2000000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    int_valid = 0; int_we = 0; int_addr = '0; int_wdata = '0; rd_valid = 0; rd_addr = '0; rd_id = '0;
    wr_valid = 0; wr_addr = '0; wr_data = '0;
    for (int i = 0; i < 2**AW; i++) ref_d[i] = '0;
    #0.2 rst_n = 0; #2 rst_n = 1;
    for (int i = 0; i < 2**AW; i++) do_write(i, i % 5 == 0);
    for (int t = 0; t < 150; t++) begin
      int a;
      a = $urandom_range(0, 2**AW - 1);
      if ($urandom_range(0, 1)) do_write(a, $urandom_range(0, 3) == 0);
      else do_read(a, $urandom_range(0, 3) == 0, 0);
    end
    repeat (3 * (TRD + TWR)) @(negedge clk);
    do_read(7, 0, 1);
    for (int i = 0; i < 2**AW; i++) do_read(i, 0, 0);
    chk(n_gap_moves > 10, $sformatf("gap moves %0d", n_gap_moves));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
