// tb_ddr_bank_ctrl: self-checking test of the DRAM bank tracker.
// Random bank/row requests; the test issues whatever the tracker asks for as
// soon as it allows it and checks, against its own per-bank model, the
// command order (ACT on a closed bank, PRE on a row miss, column command on a
// hit) and the timing: ACT to column command >= tRCD, PRE to ACT >= tRP,
// ACT to ACT >= tRRD, each met exactly (the tracker allows the command on
// the first legal clock).
// tRP, tRCD and tRRD are the paper's Table 1 values; the random command mix is a
// test choice.
`timescale 1ns/1ps
module tb_ddr_bank_ctrl;
  import ohm_pkg::*;
  localparam int NB = 16, ROW_W = 14;
  logic clk = 0, rst_n = 1, can_issue, issue;
  logic [3:0] bank;
  logic [ROW_W-1:0] row;
  logic [1:0] next_cmd;
  longint cyc = 0;
  longint t_act [NB], t_pre [NB], t_last_act;
  bit open_m [NB];
  logic [ROW_W-1:0] row_m [NB];
  int checks = 0, failures = 0;
  always #0.5 clk = !clk;
  always @(posedge clk) cyc <= cyc + 1;
  ddr_bank_ctrl dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    fork begin #1000000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    issue = 0; bank = '0; row = '0; t_last_act = -100;
    for (int b = 0; b < NB; b++) begin open_m[b] = 0; t_act[b] = -100; t_pre[b] = -100; end
    #0.2 rst_n = 0; #2 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      bit done_req;
      @(negedge clk);
      bank = 4'($urandom_range(0, 3)); row = ROW_W'($urandom_range(0, 2));
      done_req = 0;
      while (!done_req) begin
        #0.1;
        if (!open_m[bank]) chk(next_cmd == 2'd1, "ACT expected");
        else if (row_m[bank] != row) chk(next_cmd == 2'd2, "PRE expected");
        else chk(next_cmd == 2'd0, "column command expected");
        if (can_issue) begin
          unique case (next_cmd)
            2'd1: begin
              chk(cyc - t_pre[bank] >= T_RP && cyc - t_last_act >= T_RRD, "ACT too early");
              chk(cyc - t_pre[bank] == T_RP || cyc - t_last_act == T_RRD || t_pre[bank] < 0 || cyc - t_pre[bank] > T_RP, "ACT late");
              open_m[bank] = 1; row_m[bank] = row; t_act[bank] = cyc; t_last_act = cyc;
            end
            2'd2: begin
              chk(cyc - t_act[bank] >= T_RCD, "PRE too early");
              open_m[bank] = 0; t_pre[bank] = cyc;
            end
            default: begin
              chk(cyc - t_act[bank] >= T_RCD, $sformatf("column command %0d clocks after ACT", cyc - t_act[bank]));
              done_req = 1;
            end
          endcase
          issue = 1;
          @(negedge clk);
          issue = 0;
        end else begin
          chk(!(next_cmd == 2'd0 && cyc - t_act[bank] > T_RCD), "column command held back too long");
          @(negedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
