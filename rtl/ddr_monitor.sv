// ddr_monitor: reverse-write snoop in the memory controller.
//
// For the reverse-write function the XPoint controller writes a missed line
// into DRAM and the memory controller takes its copy from the same light
// instead of asking for a second transfer. The sequence (the paper's): the
// XPoint controller signals ready; the memory controller stops issuing, arms
// this monitor and confirms; the XPoint write to DRAM passes; the XPoint
// controller signals completion and the controller answers the request from the
// captured line. Here: arm loads the expected line address; while armed, the
// first write packet (C_XWR) to DRAM with that address is captured; on rwr_done the
// monitor reports done with the line (ok=0 if nothing was captured) and disarms.
module ddr_monitor
  import ohm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              arm,
  input  logic [ADDR_W-1:0] addr,
  input  logic              pkt_valid,
  input  pkt_t              pkt,
  input  logic              rwr_done,
  output logic              armed,
  output logic              done,
  output logic              ok,
  output logic [LINE_W-1:0] data
);
  logic [ADDR_W-1:0] want;
  logic got;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed <= 1'b0; got <= 1'b0; want <= '0; data <= '0; done <= 1'b0; ok <= 1'b0;
    end else begin
      done <= 1'b0;
      if (arm) begin
        armed <= 1'b1; got <= 1'b0; want <= addr;
      end else if (armed) begin
        if (pkt_valid && !got && pkt.hdr.cmd == C_XWR && pkt.hdr.dst == D_DRAM && pkt.hdr.addr == want) begin
          got <= 1'b1; data <= pkt.data;
        end
        if (rwr_done) begin
          armed <= 1'b0; done <= 1'b1; ok <= got || (pkt_valid && pkt.hdr.cmd == C_XWR && pkt.hdr.addr == want);
          if (!got && pkt_valid && pkt.hdr.cmd == C_XWR && pkt.hdr.addr == want) data <= pkt.data;
        end
      end
    end
  end
endmodule
