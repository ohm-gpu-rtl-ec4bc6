// ddr_bank_ctrl: DRAM bank-state and timing tracker of the DDR interface
// controller in the memory controller.
//
// The memory controller keeps the state of every DRAM bank (the paper relies on
// this: it presets the target row before handing a swap to the XPoint
// controller). For a (bank,row) query the tracker answers which command must
// come next - PRE if another row is open, ACT if the bank is closed, COL
// (read/write may go) if the row is open - and whether the timing allows it
// now: tRP after a PRE before an ACT, tRCD after an ACT before a column
// command, tRRD between ACTs of any banks (Table values, 1 ns cycles).
// issue applies the answered command. tCL is kept by the DRAM itself.
module ddr_bank_ctrl
  import ohm_pkg::*;
#(
  parameter int unsigned NB    = 16,
  parameter int unsigned ROW_W = 14,
  parameter int unsigned TRP   = T_RP,
  parameter int unsigned TRCD  = T_RCD,
  parameter int unsigned TRRD  = T_RRD
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [$clog2(NB)-1:0] bank,
  input  logic [ROW_W-1:0]      row,
  output logic [1:0]            next_cmd,   // 0 COL, 1 ACT, 2 PRE
  output logic                  can_issue,
  input  logic                  issue
);
  localparam logic [1:0] N_COL = 2'd0, N_ACT = 2'd1, N_PRE = 2'd2;
  logic [NB-1:0]       open_q;
  logic [ROW_W-1:0]    row_q  [NB];
  logic [5:0]          wait_q [NB];
  logic [5:0]          rrd_q;

  always_comb begin
    if (!open_q[bank])           next_cmd = N_ACT;
    else if (row_q[bank] != row) next_cmd = N_PRE;
    else                         next_cmd = N_COL;
    can_issue = (wait_q[bank] == 0) && (next_cmd != N_ACT || rrd_q == 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q <= '0; rrd_q <= '0;
      for (int b = 0; b < NB; b++) begin row_q[b] <= '0; wait_q[b] <= '0; end
    end else begin
      for (int b = 0; b < NB; b++) if (wait_q[b] != 0) wait_q[b] <= wait_q[b] - 1'b1;
      if (rrd_q != 0) rrd_q <= rrd_q - 1'b1;
      if (issue && can_issue) begin
        unique case (next_cmd)
          N_PRE: begin open_q[bank] <= 1'b0; wait_q[bank] <= 6'(TRP - 1); end
          N_ACT: begin open_q[bank] <= 1'b1; row_q[bank] <= row; wait_q[bank] <= 6'(TRCD - 1);
                       rrd_q <= 6'(TRRD - 1); end
          default: ;
        endcase
      end
    end
  end

  a_issue_legal: assert property (@(posedge clk) disable iff (!rst_n) issue |-> can_issue);
endmodule
