// serializer: SerDes transmit half in front of each optical transmitter.
//
// Holds one packet and sends it as W-bit flits, header first, least significant
// word first, one flit per clock. Commands without data are HDR_W/W flits long,
// commands with a cache line (HDR_W+LINE_W)/W. Interface: load a packet with
// load when ready; the packet then waits (req high, dst showing where it goes)
// until grant, after which it streams without a break; valid marks each flit
// and last the final one. ready returns the cycle after last.
// The paper only says a SerDes converts between the parallel device interface
// and the serial optical channel; the framing is this design's own.
module serializer
  import ohm_pkg::*;
#(
  parameter int unsigned W = VC_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  pkt_t         pkt,
  output logic         ready,
  output logic         req,
  output dev_e         dst,
  output logic         hc_ok,     // packet may share the light with a later modulator
  input  logic         grant,
  output logic         valid,
  output logic         last,
  output logic [W-1:0] flit
);
  localparam int unsigned PW = HDR_W + LINE_W;
  localparam int unsigned NF = PW / W;
  logic [PW-1:0] sh;
  logic [$clog2(NF+1)-1:0] left;
  logic busy, sending;

  assign ready = !busy;
  assign req   = busy && !sending;
  assign valid = sending;
  assign last  = sending && (left == 1);
  assign flit  = sh[W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; sending <= 1'b0; left <= '0; sh <= '0; dst <= D_NONE; hc_ok <= 1'b0;
    end else if (load && !busy) begin
      busy  <= 1'b1;
      sh    <= {pkt.data, pkt.hdr};
      left  <= ($clog2(NF+1))'(pkt_flits(pkt.hdr.cmd));
      dst   <= pkt.hdr.dst;
      hc_ok <= pkt.hdr.dst == D_XP;
    end else if (busy && !sending && grant) begin
      sending <= 1'b1;
    end else if (sending) begin
      sh   <= sh >> W;
      left <= left - 1'b1;
      if (left == 1) begin sending <= 1'b0; busy <= 1'b0; end
    end
  end

  a_grant_only_on_req: assert property (@(posedge clk) disable iff (!rst_n) grant |-> req || sending);
endmodule
