// dram_chip_model: behavioural model of the DRAM chip behind one DRAM device's
// logic layer, for simulation only.
//
// Commands arrive one per clock on c_valid/c_cmd/c_addr. ACT opens the row of
// the addressed bank, PRE closes it; RD returns the stored line and its
// metadata TCL clocks later on c_rvalid/c_rdata/c_rmeta; WR stores line and
// metadata. Unwritten lines read as zero with invalid metadata. The line
// address splits as column [5:0], bank [9:6], row above, as in the design.
// A RD or WR to a bank whose open row differs from the addressed row counts
// in n_row_err, so a testbench can check that the controller opened the row.
// Only the tCL of 11 ns comes from the Ohm-GPU paper's configuration; the
// command port and the sparse storage are this model's own choices.
module dram_chip_model
  import ohm_pkg::*;
#(
  parameter int unsigned IDX_W = 24,
  parameter int unsigned TCL   = T_CL
) (
  input  logic              clk,
  input  logic              c_valid,
  input  cmd_e              c_cmd,
  input  logic [ADDR_W-1:0] c_addr,
  input  logic [LINE_W-1:0] c_wdata,
  input  meta_t             c_wmeta,
  output logic              c_rvalid,
  output logic [LINE_W-1:0] c_rdata,
  output meta_t             c_rmeta,
  output int                n_row_err,
  output int                n_rd,
  output int                n_wr
);
  logic [LINE_W+7:0] mem [logic [ADDR_W-1:0]];
  logic [15:0] open_v;
  logic [15:0][IDX_W-11:0] open_row;
  logic [TCL-1:0] pv;
  logic [TCL-1:0][LINE_W+7:0] pd;
  logic [3:0] bk;
  logic [IDX_W-11:0] rw;

  initial begin open_v = '0; pv = '0; n_row_err = 0; n_rd = 0; n_wr = 0; end
  assign bk = c_addr[9:6];
  assign rw = c_addr[IDX_W-1:10];
  assign c_rvalid = pv[TCL-1];
  assign {c_rmeta, c_rdata} = pd[TCL-1];

  always @(posedge clk) begin
    pv <= {pv[TCL-2:0], 1'b0};
    pd <= {pd[TCL-2:0], (LINE_W+8)'(0)};
    if (c_valid) begin
      case (c_cmd)
        C_ACT: begin open_v[bk] <= 1'b1; open_row[bk] <= rw; end
        C_PRE: open_v[bk] <= 1'b0;
        C_RD, C_WR: begin
          if (!open_v[bk] || open_row[bk] != rw) n_row_err <= n_row_err + 1;
          if (c_cmd == C_WR) begin
            mem[c_addr] = {c_wmeta, c_wdata};
            n_wr <= n_wr + 1;
          end else begin
            pv[0] <= 1'b1;
            pd[0] <= mem.exists(c_addr) ? mem[c_addr] : '0;
            n_rd <= n_rd + 1;
          end
        end
        default: ;
      endcase
    end
  end
endmodule
