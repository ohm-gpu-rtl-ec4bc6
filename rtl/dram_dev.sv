// dram_dev: optical interface of a DRAM device.
//
// A DRAM chip expects command, address and data in parallel, while the optical
// channel delivers them serially; the device therefore gets deserializers
// behind its detectors, an input buffer, an output buffer and a serializer in
// front of its modulator (the paper puts a SerDes and about 16 KB of registers
// in front of each memory device). Packets arrive from the memory controller on
// the forward detector and from the XPoint controller on the backward detector;
// both are merged into the input buffer (only one of them can hear a sender at
// a time). Each buffered command is issued to the chip port one per clock:
// ACT, PRE, RD, WR from the memory controller and XRD, XWR from the XPoint
// controller (XRD/XWR become plain reads/writes). The chip port carries the
// line and its metadata (valid, dirty, tag in the ECC region). Read data comes
// back from the chip in order, after tCL; it is packed as C_RDDATA and sent to
// whoever asked (memory controller or XPoint controller).
module dram_dev
  import ohm_pkg::*;
#(
  parameter int unsigned IN_DEPTH  = 256,   // 256 x 72 B = 18 KB, about the 16 KB of the paper
  parameter int unsigned OUT_DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rxf_valid,
  input  pkt_t              rxf_pkt,
  input  logic              rxb_valid,
  input  pkt_t              rxb_pkt,
  output logic              tx_load,
  output pkt_t              tx_pkt,
  input  logic              tx_ready,
  // DRAM chip port
  output logic              c_valid,
  output cmd_e              c_cmd,       // C_ACT, C_PRE, C_RD or C_WR
  output logic [ADDR_W-1:0] c_addr,
  output logic [LINE_W-1:0] c_wdata,
  output meta_t             c_wmeta,
  input  logic              c_rvalid,
  input  logic [LINE_W-1:0] c_rdata,
  input  meta_t             c_rmeta,
  output logic              overflow
);
  localparam int unsigned PKT_W = $bits(pkt_t);
  localparam int unsigned PD_W  = 2 + 8 + ADDR_W;

  logic in_push, in_pop, in_empty, in_full;
  pkt_t in_din, in_head;
  logic [$clog2(IN_DEPTH):0] in_cnt;
  logic pd_push, pd_pop, pd_empty, pd_full;
  logic [PD_W-1:0] pd_din, pd_head;
  logic [4:0] pd_cnt;
  logic out_push, out_pop, out_empty, out_full;
  pkt_t out_din, out_head;
  logic [$clog2(OUT_DEPTH):0] out_cnt;
  logic is_rd;

  always_comb begin
    in_push = 1'b0; in_din = rxf_pkt;
    if (rxf_valid && rxf_pkt.hdr.dst == D_DRAM) begin in_push = 1'b1; end
    else if (rxb_valid && rxb_pkt.hdr.dst == D_DRAM) begin in_push = 1'b1; in_din = rxb_pkt; end
  end

  sync_fifo #(.WIDTH(PKT_W), .DEPTH(IN_DEPTH)) u_in (
    .clk, .rst_n, .push(in_push && !in_full), .din(in_din), .pop(in_pop), .dout(in_head),
    .full(in_full), .empty(in_empty), .count(in_cnt));

  assign is_rd  = (in_head.hdr.cmd == C_RD) || (in_head.hdr.cmd == C_XRD);
  assign in_pop = !in_empty && !(is_rd && pd_full);

  always_comb begin
    c_valid = in_pop;
    unique case (in_head.hdr.cmd)
      C_XRD:   c_cmd = C_RD;
      C_XWR:   c_cmd = C_WR;
      default: c_cmd = in_head.hdr.cmd;
    endcase
    c_addr  = in_head.hdr.addr;
    c_wdata = in_head.data;
    c_wmeta = in_head.hdr.meta;
  end

  assign pd_push = in_pop && is_rd;
  assign pd_din  = {in_head.hdr.src, in_head.hdr.id, in_head.hdr.addr};
  sync_fifo #(.WIDTH(PD_W), .DEPTH(16)) u_pend (
    .clk, .rst_n, .push(pd_push), .din(pd_din), .pop(pd_pop), .dout(pd_head),
    .full(pd_full), .empty(pd_empty), .count(pd_cnt));

  assign pd_pop   = c_rvalid && !pd_empty;
  assign out_push = pd_pop;
  always_comb begin
    out_din          = '0;
    out_din.hdr.cmd  = C_RDDATA;
    out_din.hdr.src  = D_DRAM;
    out_din.hdr.dst  = dev_e'(pd_head[PD_W-1 -: 2]);
    out_din.hdr.id   = pd_head[ADDR_W +: 8];
    out_din.hdr.addr = pd_head[ADDR_W-1:0];
    out_din.hdr.meta = c_rmeta;
    out_din.data     = c_rdata;
  end
  sync_fifo #(.WIDTH(PKT_W), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n, .push(out_push && !out_full), .din(out_din), .pop(out_pop), .dout(out_head),
    .full(out_full), .empty(out_empty), .count(out_cnt));

  assign out_pop = !out_empty && tx_ready;
  assign tx_load = out_pop;
  assign tx_pkt  = out_head;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) overflow <= 1'b0;
    else if ((in_push && in_full) || (out_push && out_full)) overflow <= 1'b1;
  end

  a_one_source: assert property (@(posedge clk) disable iff (!rst_n)
    !(rxf_valid && rxf_pkt.hdr.dst == D_DRAM && rxb_valid && rxb_pkt.hdr.dst == D_DRAM));
endmodule
