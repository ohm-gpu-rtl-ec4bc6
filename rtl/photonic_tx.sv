// photonic_tx: behavioural model of a bank of micro-ring (MRR) modulators, one
// per wavelength of a virtual channel. It is a model of an optical part, not
// logic, but it is written as plain level arithmetic so that the channel can be
// simulated and synthesised as a reference.
//
// Light power on each wavelength is an integer in sixteenths of the laser power.
// When not transmitting the ring is detuned and the light passes. When
// transmitting, a 1 bit leaves the light as it is; a 0 bit either absorbs it
// (conventional, fully coupled modulator) or, with hc=1, halves it (the
// half-coupled modulator of the memory controller, which leaves enough light
// for a device further along the ring to modulate its own data). Both rules are
// the paper's; the quantisation is this model's. Purely combinational.
module photonic_tx
  import ohm_pkg::*;
#(
  parameter int unsigned W = VC_W
) (
  input  logic [W-1:0][LVL_W-1:0] light_in,
  input  logic                    en,
  input  logic                    hc,
  input  logic [W-1:0]            bits,
  output logic [W-1:0][LVL_W-1:0] light_out
);
  always_comb begin
    for (int i = 0; i < W; i++) begin
      if (!en || bits[i])  light_out[i] = light_in[i];
      else if (hc)         light_out[i] = light_in[i] >> 1;
      else                 light_out[i] = '0;
    end
  end
endmodule
