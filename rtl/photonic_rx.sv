// photonic_rx: behavioural model of a bank of micro-ring photonic detectors
// (ring, photodetector and transimpedance amplifier) on one virtual channel.
//
// mode RX_OFF detunes the ring: nothing is detected and the light passes.
// RX_FULL couples all the light out (nothing passes on). RX_HALF couples half of
// it out and lets the other half continue, which is how a device snarfs traffic
// addressed to another device. A bit is decided from the light strength: if the
// sender used half-coupled coding (hc_src) a 0 is a half-power symbol, so the
// bit is 1 when the level exceeds 3/4 of ref_in, the level this point would see
// with every modulator idle; otherwise any light at all is a 1. The coupling
// states are the paper's; the thresholds are this model's choice.
// Purely combinational; bits read 0 while the detector is off.
module photonic_rx
  import ohm_pkg::*;
#(
  parameter int unsigned W = VC_W
) (
  input  logic [W-1:0][LVL_W-1:0] light_in,
  input  logic [W-1:0][LVL_W-1:0] ref_in,
  input  rx_mode_e                mode,
  input  logic                    hc_src,
  output logic [W-1:0]            bits,
  output logic [W-1:0][LVL_W-1:0] light_out,
  output logic [W-1:0][LVL_W-1:0] ref_out
);
  always_comb begin
    for (int i = 0; i < W; i++) begin
      unique case (mode)
        RX_FULL: begin light_out[i] = '0;               ref_out[i] = '0;             end
        RX_HALF: begin light_out[i] = light_in[i] >> 1; ref_out[i] = ref_in[i] >> 1; end
        default: begin light_out[i] = light_in[i];      ref_out[i] = ref_in[i];      end
      endcase
      if (mode == RX_OFF)  bits[i] = 1'b0;
      else if (hc_src)     bits[i] = ({2'b0, light_in[i]} << 2) > ({1'b0, ref_in[i]} * 3);
      else                 bits[i] = light_in[i] != '0;
    end
  end
endmodule
