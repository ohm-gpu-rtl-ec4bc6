// optical_vchannel: behavioural model of one virtual channel of the optical
// memory channel - a bundle of W wavelengths travelling round a waveguide loop
// that passes the memory controller (MC), a DRAM device and an XPoint device.
// It models optics (laser, rings, waveguide), not logic, with light power kept
// as integer levels so that it can be simulated and synthesised as a reference.
//
// Order along the loop, as drawn for one DRAM/XPoint pair:
//   laser (full power) -> MC modulator -> DRAM forward detector -> DRAM
//   modulator -> XPoint forward detector -> XPoint modulator -> loop turn ->
//   DRAM backward detector -> MC detector.
// The MC modulator can be half-coupled (a 0 halves the light), the device
// modulators are conventional. Detectors are off, fully or half coupled, as set
// by the demultiplexer control. Combining a half-coupled MC modulator, a
// half-coupled XPoint detector and the XPoint modulator gives the dual route of
// the swap function: the MC's data reaches the XPoint while the XPoint's own
// data rides the same light on to the DRAM. A second pass with every modulator
// idle gives each detector the reference level it decides against.
// Purely combinational: a flit crosses the loop in the cycle it is sent.
// The loop order, the half-coupled rings and the dual route follow the Ohm-GPU
// paper; the sixteenth-of-laser power levels and the reference pass are this
// model's own choices.
module optical_vchannel
  import ohm_pkg::*;
#(
  parameter int unsigned W = VC_W
) (
  input  logic         mc_tx_en,
  input  logic         mc_tx_hc,
  input  logic [W-1:0] mc_tx_bits,
  input  logic         dram_tx_en,
  input  logic [W-1:0] dram_tx_bits,
  input  logic         xp_tx_en,
  input  logic [W-1:0] xp_tx_bits,
  input  rx_mode_e     dram_rxf_mode,
  input  logic         dram_rxf_hc,
  output logic [W-1:0] dram_rxf_bits,
  input  rx_mode_e     xp_rxf_mode,
  input  logic         xp_rxf_hc,
  output logic [W-1:0] xp_rxf_bits,
  input  rx_mode_e     dram_rxb_mode,
  input  logic         dram_rxb_hc,
  output logic [W-1:0] dram_rxb_bits,
  input  rx_mode_e     mc_rx_mode,
  input  logic         mc_rx_hc,
  output logic [W-1:0] mc_rx_bits,
  output logic [W-1:0][LVL_W-1:0] light_at_mc_rx   // for observation
);
  typedef logic [W-1:0][LVL_W-1:0] lv_t;
  lv_t laser, l1, l2, r2, l3, l4, r4, l5, l6, r6, l7, r7;

  always_comb for (int i = 0; i < W; i++) laser[i] = LASER;

  photonic_tx #(.W(W)) u_mc_tx   (.light_in(laser), .en(mc_tx_en), .hc(mc_tx_hc), .bits(mc_tx_bits), .light_out(l1));
  photonic_rx #(.W(W)) u_dram_rf (.light_in(l1), .ref_in(laser), .mode(dram_rxf_mode), .hc_src(dram_rxf_hc),
                                  .bits(dram_rxf_bits), .light_out(l2), .ref_out(r2));
  photonic_tx #(.W(W)) u_dram_tx (.light_in(l2), .en(dram_tx_en), .hc(1'b0), .bits(dram_tx_bits), .light_out(l3));
  photonic_rx #(.W(W)) u_xp_rf   (.light_in(l3), .ref_in(r2), .mode(xp_rxf_mode), .hc_src(xp_rxf_hc),
                                  .bits(xp_rxf_bits), .light_out(l4), .ref_out(r4));
  photonic_tx #(.W(W)) u_xp_tx   (.light_in(l4), .en(xp_tx_en), .hc(1'b0), .bits(xp_tx_bits), .light_out(l5));
  photonic_rx #(.W(W)) u_dram_rb (.light_in(l5), .ref_in(r4), .mode(dram_rxb_mode), .hc_src(dram_rxb_hc),
                                  .bits(dram_rxb_bits), .light_out(l6), .ref_out(r6));
  photonic_rx #(.W(W)) u_mc_rx   (.light_in(l6), .ref_in(r6), .mode(mc_rx_mode), .hc_src(mc_rx_hc),
                                  .bits(mc_rx_bits), .light_out(l7), .ref_out(r7));
  assign light_at_mc_rx = l6;
endmodule
