// ddr_seq_gen: DDR sequence generator of the XPoint controller (swap function).
//
// After the memory controller has opened the DRAM row and sent SWAP-CMD (DRAM
// line address, XPoint line address, number of lines), the XPoint controller
// exchanges the DRAM page with the XPoint page by itself, driving the DRAM
// through command packets on the optical channel. Per line i:
//   1. send C_XRD for DRAM line dram+i and, meanwhile, read XPoint line xp+i;
//   2. when both lines are in, send C_XWR writing the XPoint line to DRAM;
//   3. write the DRAM line into XPoint.
// done pulses after the last XPoint write was accepted; the controller then
// reports completion to the memory controller over DDR-T. The steps follow the
// paper (read DRAM, write DRAM by the XPoint controller); handling one line at a
// time with the XPoint read overlapped is this design's choice.
module ddr_seq_gen
  import ohm_pkg::*;
#(
  parameter int unsigned AW = 30
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] dram_addr,
  input  logic [AW-1:0]     xp_addr,
  input  logic [15:0]       nlines,
  output logic              busy,
  output logic              done,
  // packets to DRAM
  output logic              tx_load,
  output pkt_t              tx_pkt,
  input  logic              tx_ready,
  // DRAM read data addressed to the XPoint controller
  input  logic              rx_valid,
  input  pkt_t              rx_pkt,
  // XPoint engine internal port
  output logic              int_valid,
  output logic              int_we,
  output logic [AW-1:0]     int_addr,
  output logic [LINE_W-1:0] int_wdata,
  input  logic              int_ready,
  input  logic              rsp_valid,
  input  logic              rsp_int,
  input  logic [LINE_W-1:0] rsp_data
);
  typedef enum logic [2:0] {G_IDLE, G_RD, G_WAIT, G_WR, G_XPW} st_e;
  st_e st;
  logic [ADDR_W-1:0] d_base;
  logic [AW-1:0] x_base;
  logic [15:0] n, i;
  logic xrd_sent, xp_rd_issued, have_d, have_x;
  logic [LINE_W-1:0] d_line, x_line;

  assign busy = (st != G_IDLE);

  always_comb begin
    tx_load = 1'b0; tx_pkt = '0;
    int_valid = 1'b0; int_we = 1'b0; int_addr = x_base + AW'(i); int_wdata = d_line;
    tx_pkt.hdr.src  = D_XP;
    tx_pkt.hdr.dst  = D_DRAM;
    tx_pkt.hdr.addr = d_base + ADDR_W'(i);
    unique case (st)
      G_RD: begin
        if (!xrd_sent && tx_ready) begin tx_load = 1'b1; tx_pkt.hdr.cmd = C_XRD; end
        if (!xp_rd_issued) int_valid = 1'b1;
      end
      G_WR: if (tx_ready) begin tx_load = 1'b1; tx_pkt.hdr.cmd = C_XWR; tx_pkt.data = x_line; end
      G_XPW: begin int_valid = 1'b1; int_we = 1'b1; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; d_base <= '0; x_base <= '0; n <= '0; i <= '0; done <= 1'b0;
      xrd_sent <= 1'b0; xp_rd_issued <= 1'b0; have_d <= 1'b0; have_x <= 1'b0;
      d_line <= '0; x_line <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        G_IDLE: if (start) begin
          d_base <= dram_addr; x_base <= xp_addr; n <= nlines; i <= '0;
          xrd_sent <= 1'b0; xp_rd_issued <= 1'b0; have_d <= 1'b0; have_x <= 1'b0;
          st <= (nlines == 0) ? G_IDLE : G_RD;
          if (nlines == 0) done <= 1'b1;
        end
        G_RD, G_WAIT: begin
          if (tx_load) xrd_sent <= 1'b1;
          if (int_valid && int_ready) xp_rd_issued <= 1'b1;
          if (rx_valid && rx_pkt.hdr.cmd == C_RDDATA && rx_pkt.hdr.dst == D_XP) begin
            have_d <= 1'b1; d_line <= rx_pkt.data;
          end
          if (rsp_valid && rsp_int) begin have_x <= 1'b1; x_line <= rsp_data; end
          if (have_d && have_x) st <= G_WR;
        end
        G_WR: if (tx_load) st <= G_XPW;
        G_XPW: if (int_ready) begin
          have_d <= 1'b0; have_x <= 1'b0; xrd_sent <= 1'b0; xp_rd_issued <= 1'b0;
          if (i + 1 == n) begin st <= G_IDLE; done <= 1'b1; end
          else begin i <= i + 1'b1; st <= G_RD; end
        end
        default: st <= G_IDLE;
      endcase
    end
  end
endmodule
