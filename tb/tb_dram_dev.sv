// tb_dram_dev: self-checking test of the DRAM device logic layer.
//
// Checks on the device: it executes commands from the MC (forward detector)
// and from the XPoint (backward detector: swap reads and writes, reverse
// writes), answers reads to whoever asked, keeps the metadata with each line
// (two-level hits need it), never overflows its input buffer, and every read
// or write finds its row open.
// The block is exercised inside one virtual channel (ohm_vc with a small
// address space: 4096 DRAM lines, 2^18 XPoint lines, XPoint read/write of
// 40/80 clocks, a gap move every 20 XPoint writes), with the DRAM chip model,
// the XPoint media model and the GPU-side driver (vc_driver), which checks
// every read answer against a reference, times one XPoint read and runs a
// planar and a two-level phase with a mode change between them.
// A watchdog ends the run as failed after 2,000,000 clocks.
// The DRAM timing is the paper's Table 1; the channel sizes are reduced here
// only to keep the simulation short.
`timescale 1ns/1ps
module tb_dram_dev;
  import ohm_pkg::*;
  localparam int IDX_W = 12, G_W = 6, XP_AW = 18, TXRD = 40, TXWR = 80;
  logic clk = 1'b0, rst_n = 1'b1;
  always #0.5 clk = !clk;
  logic two_level, req_valid, req_ready, req_we, rsp_valid, rsp_we;
  logic [ADDR_W-1:0] req_addr, c_addr;
  logic [LINE_W-1:0] req_wdata, rsp_data, c_wdata, c_rdata, m_wdata, m_rdata;
  logic [7:0] req_id, rsp_id;
  logic c_valid, c_rvalid, m_en, m_we, init_busy, err, done;
  cmd_e c_cmd;
  meta_t c_wmeta, c_rmeta;
  logic [XP_AW:0] m_addr;
  vc_stats_t stats;
  int chk, fl, row_err, drd, dwr, xwr;

  ohm_vc #(.IDX_W(IDX_W), .G_W(G_W), .XP_AW(XP_AW), .PSI(20), .TXRD(TXRD), .TXWR(TXWR)) dut (.*);
  dram_chip_model #(.IDX_W(IDX_W)) u_dram (.clk, .c_valid, .c_cmd, .c_addr, .c_wdata, .c_wmeta, .c_rvalid,
    .c_rdata, .c_rmeta, .n_row_err(row_err), .n_rd(drd), .n_wr(dwr));
  xp_media_model #(.AW(XP_AW)) u_xp (.clk, .m_en, .m_we, .m_addr, .m_wdata, .m_rdata, .n_wr(xwr));
  vc_driver #(.IDX_W(IDX_W), .G_W(G_W), .TXRD(TXRD), .FIRST_2L(1'b1), .SEED(9)) u_drv (.clk, .init_busy,
    .two_level, .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .req_id, .rsp_valid, .rsp_we, .rsp_id,
    .rsp_data, .checks(chk), .failures(fl), .done);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #0.2 rst_n = 1'b0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    fork
      begin
        repeat (2000000) @(posedge clk);
        $display("FAIL: watchdog");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
        $finish;
      end
    join_none
    wait (done);
    while (stats.swap != stats.swap_done) @(posedge clk);
    repeat (10) @(posedge clk);
    checks += chk; failures += fl;
    check(!err, "framing or buffer error flag");
    check(row_err == 0, $sformatf("%0d DRAM accesses to a closed row", row_err));
    check(drd > 0 && dwr > 0, "DRAM reads and writes");
    check(stats.hit >= 8, "metadata kept with the line");
    check(stats.rwr > 0 && stats.swap_done > 0, "XPoint-driven DRAM accesses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
