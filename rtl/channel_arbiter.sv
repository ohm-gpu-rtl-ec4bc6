// channel_arbiter: optical resource management of one virtual channel.
//
// Three transmitters share the loop: the memory controller (MC), the DRAM
// device and the XPoint controller. Packets are atomic: a transmitter asks with
// req, gets a one-cycle grant and then holds the light until its last flit
// (its *_busy input is its serializer's valid). The rules follow from the light
// path: the MC and the DRAM modulate the same stretch of the loop, so only one
// of them sends at a time; the XPoint modulator sits after both, so it can
// send when neither does, or - the dual route - while the MC sends a
// half-coupled packet to the XPoint (planar mode, the MC leaves half the light
// on a 0 and the XPoint detector is half coupled). Priority when several ask:
// DRAM, then XPoint, then MC (device responses drain first; own choice).
// Purely combinational grants, computed from the current senders.
module channel_arbiter
  import ohm_pkg::*;
(
  input  logic two_level,
  input  logic mc_req,   input dev_e mc_dst,  input logic mc_busy,
  input  logic dram_req,                       input logic dram_busy,
  input  logic xp_req,                         input logic xp_busy,
  output logic mc_grant,
  output logic dram_grant,
  output logic xp_grant,
  output logic overlay     // high while the XPoint rides an MC packet
);
  logic head_busy, mc_overlay_ok;
  dev_e mc_cur_dst;
  assign head_busy = mc_busy || dram_busy;

  // destination of the MC packet that holds the light (mc_dst stays stable
  // in the serializer while it sends)
  assign mc_cur_dst    = mc_dst;
  assign mc_overlay_ok = !two_level && (mc_cur_dst == D_XP);
  assign overlay       = xp_busy && mc_busy;

  always_comb begin
    dram_grant = 1'b0;
    xp_grant   = 1'b0;
    mc_grant   = 1'b0;
    if (dram_req && !head_busy && !xp_busy) begin
      dram_grant = 1'b1;
    end else begin
      if (xp_req && !xp_busy && !dram_busy && (!mc_busy || mc_overlay_ok))
        xp_grant = 1'b1;
      if (mc_req && !head_busy && !dram_req &&
          (!(xp_busy || xp_grant) || (!two_level && mc_dst == D_XP)))
        mc_grant = 1'b1;
    end
  end
endmodule
