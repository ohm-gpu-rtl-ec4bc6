// demux_ctrl: control of the photonic demultiplexer of one virtual channel.
//
// From which transmitters are active and where their packets go, it sets every
// detector on the loop: the addressed device's detector is enabled and all
// others are detuned so that they yield the light (as in the paper). On top of
// that it configures the dual routes of this design:
//  - two-level mode: the DRAM forward detector is half coupled so that the
//    XPoint controller snarfs MC->DRAM requests, and the XPoint forward detector
//    is half coupled on DRAM->MC data so that it snarfs read data and metadata
//    (auto-read/write); the DRAM backward detector is half coupled on
//    XPoint->DRAM writes so that the MC can capture them (reverse write) when
//    its DDR monitor is on;
//  - planar mode: the MC modulator is half coupled and the XPoint forward
//    detector is half coupled when the MC talks to the XPoint, so that the
//    XPoint can send swap data to DRAM on the same light.
// For each detector it reports which sender it hears (D_NONE when off) and
// whether that sender uses half-coupled coding. Purely combinational.
module demux_ctrl
  import ohm_pkg::*;
(
  input  logic     two_level,
  input  logic     mc_act,   input dev_e mc_dst,
  input  logic     dram_act, input dev_e dram_dst,
  input  logic     xp_act,   input dev_e xp_dst,
  input  logic     mon_en,
  output logic     mc_hc,
  output rx_mode_e dram_rxf_mode, output dev_e dram_rxf_src,
  output rx_mode_e xp_rxf_mode,   output dev_e xp_rxf_src,
  output rx_mode_e dram_rxb_mode, output dev_e dram_rxb_src,
  output rx_mode_e mc_rx_mode,    output dev_e mc_rx_src
);
  assign mc_hc = !two_level;

  always_comb begin
    dram_rxf_mode = RX_OFF; dram_rxf_src = D_NONE;
    xp_rxf_mode   = RX_OFF; xp_rxf_src   = D_NONE;
    dram_rxb_mode = RX_OFF; dram_rxb_src = D_NONE;
    mc_rx_mode    = RX_OFF; mc_rx_src    = D_NONE;

    if (mc_act && mc_dst == D_DRAM) begin
      dram_rxf_mode = two_level ? RX_HALF : RX_FULL; dram_rxf_src = D_MC;
    end

    if (mc_act && mc_dst == D_XP) begin
      xp_rxf_mode = two_level ? RX_FULL : RX_HALF; xp_rxf_src = D_MC;
    end else if (two_level && mc_act && mc_dst == D_DRAM) begin
      xp_rxf_mode = RX_HALF; xp_rxf_src = D_MC;           // snarf request
    end else if (dram_act && dram_dst == D_XP) begin
      xp_rxf_mode = RX_FULL; xp_rxf_src = D_DRAM;
    end else if (two_level && dram_act && dram_dst == D_MC) begin
      xp_rxf_mode = RX_HALF; xp_rxf_src = D_DRAM;         // snarf data + metadata
    end

    if (xp_act && xp_dst == D_DRAM) begin
      dram_rxb_mode = (two_level && mon_en) ? RX_HALF : RX_FULL; dram_rxb_src = D_XP;
    end

    if (dram_act && dram_dst == D_MC) begin
      mc_rx_mode = RX_FULL; mc_rx_src = D_DRAM;
    end else if (xp_act && (xp_dst == D_MC || (xp_dst == D_DRAM && two_level && mon_en))) begin
      mc_rx_mode = RX_FULL; mc_rx_src = D_XP;
    end
  end
endmodule
