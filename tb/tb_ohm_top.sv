// tb_ohm_top: end-to-end test of the whole memory system at its full size
// (six virtual channels, 1 GB DRAM and 64 GB XPoint address space per channel,
// the paper's XPoint read and write times), for simulation only.
//
// Each channel gets its own DRAM chip model, XPoint media model and GPU-side
// driver (vc_driver). Even channels start in planar mode and switch to
// two-level, odd channels the other way round. The test checks every read
// answer against a reference, that every DRAM read or write found its row
// open, that no channel flagged a framing or buffer error, and that each
// mechanism of the design happened at least once somewhere: a request stalled
// on a conflict, a page swap, a victim eviction by the XPoint controller, a
// reverse write, a mode change, a Start-Gap line move and an XPoint transfer
// riding on the memory controller's light (dual route).
// A watchdog ends the run as failed after 3,000,000 clocks.
`timescale 1ns/1ps
module tb_ohm_top;
  import ohm_pkg::*;
  localparam int NV = N_VC;

  logic clk = 1'b0, rst_n = 1'b1;
  always #0.5 clk = !clk;

  logic [NV-1:0]             two_level, req_valid, req_ready, req_we, rsp_valid, rsp_we;
  logic [NV-1:0][ADDR_W-1:0] req_addr;
  logic [NV-1:0][LINE_W-1:0] req_wdata, rsp_data, c_wdata, c_rdata, m_wdata, m_rdata;
  logic [NV-1:0][7:0]        req_id, rsp_id;
  logic [NV-1:0]             c_valid, c_rvalid, m_en, m_we, init_busy, err;
  cmd_e [NV-1:0]             c_cmd;
  logic [NV-1:0][ADDR_W-1:0] c_addr;
  meta_t [NV-1:0]            c_wmeta, c_rmeta;
  logic [NV-1:0][30:0]       m_addr;
  vc_stats_t [NV-1:0]        stats;

  ohm_top dut (.*);

  int chk [NV], fl [NV], row_err [NV], drd [NV], dwr [NV], xwr [NV];
  logic [NV-1:0] done;

  for (genvar v = 0; v < NV; v++) begin : g_ch
    dram_chip_model u_dram (.clk, .c_valid(c_valid[v]), .c_cmd(c_cmd[v]), .c_addr(c_addr[v]),
      .c_wdata(c_wdata[v]), .c_wmeta(c_wmeta[v]), .c_rvalid(c_rvalid[v]), .c_rdata(c_rdata[v]),
      .c_rmeta(c_rmeta[v]), .n_row_err(row_err[v]), .n_rd(drd[v]), .n_wr(dwr[v]));
    xp_media_model u_xp (.clk, .m_en(m_en[v]), .m_we(m_we[v]), .m_addr(m_addr[v]),
      .m_wdata(m_wdata[v]), .m_rdata(m_rdata[v]), .n_wr(xwr[v]));
    vc_driver #(.FIRST_2L(v % 2 == 1), .SEED(v + 11)) u_drv (.clk, .init_busy(init_busy[v]),
      .two_level(two_level[v]), .req_valid(req_valid[v]), .req_ready(req_ready[v]), .req_we(req_we[v]),
      .req_addr(req_addr[v]), .req_wdata(req_wdata[v]), .req_id(req_id[v]),
      .rsp_valid(rsp_valid[v]), .rsp_we(rsp_we[v]), .rsp_id(rsp_id[v]), .rsp_data(rsp_data[v]),
      .checks(chk[v]), .failures(fl[v]), .done(done[v]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint unsigned tot_stall, tot_swap, tot_evict, tot_rwr, tot_mode, tot_gap, tot_ovl;
  initial begin
    #0.2 rst_n = 1'b0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    fork
      begin : watchdog
        repeat (3000000) @(posedge clk);
        $display("FAIL: watchdog, channels done = %b", done);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
        $finish;
      end
    join_none
    wait (&done);
    // a page that became hot late may still be swapping
    for (int v = 0; v < NV; v++) while (stats[v].swap != stats[v].swap_done) @(posedge clk);
    repeat (10) @(posedge clk);
    tot_stall = 0; tot_swap = 0; tot_evict = 0; tot_rwr = 0; tot_mode = 0; tot_gap = 0; tot_ovl = 0;
    for (int v = 0; v < NV; v++) begin
      checks += chk[v]; failures += fl[v];
      check(row_err[v] == 0, $sformatf("channel %0d: %0d DRAM accesses to a closed row", v, row_err[v]));
      check(!err[v], $sformatf("channel %0d: error flag", v));
      check(stats[v].swap == stats[v].swap_done, $sformatf("channel %0d: swaps started %0d finished %0d",
            v, stats[v].swap, stats[v].swap_done));
      tot_stall += stats[v].stall;  tot_swap += stats[v].swap_done; tot_evict += stats[v].evict;
      tot_rwr   += stats[v].rwr;    tot_mode += stats[v].mode_sw;   tot_gap   += stats[v].gap;
      tot_ovl   += stats[v].overlay;
      $display("channel %0d: checks %0d stall %0d swap %0d evict %0d rwr %0d mode %0d gap %0d overlay %0d hit %0d miss %0d",
               v, chk[v], stats[v].stall, stats[v].swap_done, stats[v].evict, stats[v].rwr,
               stats[v].mode_sw, stats[v].gap, stats[v].overlay, stats[v].hit, stats[v].miss);
    end
    check(tot_stall > 0, "no conflict stall happened");
    check(tot_swap  > 0, "no swap happened");
    check(tot_evict > 0, "no snarf eviction happened");
    check(tot_rwr   > 0, "no reverse write happened");
    check(tot_mode  > 0, "no mode switch happened");
    check(tot_gap   > 0, "no Start-Gap move happened");
    check(tot_ovl   > 0, "no dual-route overlay happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
