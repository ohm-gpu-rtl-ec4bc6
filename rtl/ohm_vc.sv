// ohm_vc: one virtual channel of the Ohm optical memory system.
//
// A virtual channel is a 16-wavelength slice of the shared waveguide that joins
// one GPU memory controller to one DRAM device and one XPoint device. This
// module wires, for that slice:
//   mem_ctrl  -> serializer -> [MC modulator]
//   [DRAM fwd detector] -> deserializer -> dram_dev -> serializer -> [DRAM modulator]
//   [XPoint fwd detector] -> deserializer -> xpoint_ctrl -> serializer -> [XPoint modulator]
//   [DRAM bwd detector] -> deserializer -> dram_dev
//   [MC detector] -> deserializer -> mem_ctrl
// with channel_arbiter granting the light, demux_ctrl choosing which detector
// listens (and whether it absorbs all or half of the light) and
// optical_vchannel modelling the light on the loop. A deserializer takes its
// flit-valid from the serializer its detector is listening to: the model has
// no clock recovery, the valid stands in for the preamble of a real receiver.
// The DRAM chip and the XPoint media are outside (c_* and m_* ports).
// two_level selects the operating mode; it is registered and every change
// after the remap table is initialised is counted. The GPU side must let the channel drain before changing it, since
// the remap table and the DRAM cache contents are not converted (the paper
// does not describe switching at run time).
// Timing: one clock is one flit time on the channel (16 bits per clock).
module ohm_vc
  import ohm_pkg::*;
#(
  parameter int unsigned IDX_W  = 24,
  parameter int unsigned G_W    = 18,
  parameter int unsigned M      = 8,
  parameter int unsigned XP_AW  = 30,
  parameter int unsigned HOT_TH = 4,
  parameter int unsigned PSI    = 100,
  parameter int unsigned TXRD   = T_XP_RD,
  parameter int unsigned TXWR   = T_XP_WR
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              two_level,
  // GPU side
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [LINE_W-1:0] req_wdata,
  input  logic [7:0]        req_id,
  output logic              rsp_valid,
  output logic              rsp_we,
  output logic [7:0]        rsp_id,
  output logic [LINE_W-1:0] rsp_data,
  // DRAM chip
  output logic              c_valid,
  output cmd_e              c_cmd,
  output logic [ADDR_W-1:0] c_addr,
  output logic [LINE_W-1:0] c_wdata,
  output meta_t             c_wmeta,
  input  logic              c_rvalid,
  input  logic [LINE_W-1:0] c_rdata,
  input  meta_t             c_rmeta,
  // XPoint media
  output logic              m_en,
  output logic              m_we,
  output logic [XP_AW:0]    m_addr,
  output logic [LINE_W-1:0] m_wdata,
  input  logic [LINE_W-1:0] m_rdata,
  // status
  output logic              init_busy,
  output logic              err,
  output vc_stats_t         stats
);
  logic mode;

  // ---------------- devices ----------------
  logic mc_load, mc_rdy, dr_load, dr_rdy, xp_load, xp_rdy;
  pkt_t mc_pkt, dr_pkt, xp_pkt;
  logic mcd_v, drf_v, xpf_v, drb_v;
  pkt_t mcd_p, drf_p, xpf_p, drb_p;
  logic rdy_valid, confirm, rwr_done, mon_en, xp_full;
  rdy_e rdy_kind;
  logic [7:0] rdy_id;
  logic dr_ovf;

  mem_ctrl #(.IDX_W(IDX_W), .G_W(G_W), .M(M), .XP_AW(XP_AW), .HOT_TH(HOT_TH)) u_mc (
    .clk, .rst_n, .two_level(mode),
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .req_id,
    .rsp_valid, .rsp_we, .rsp_id, .rsp_data,
    .tx_load(mc_load), .tx_pkt(mc_pkt), .tx_ready(mc_rdy), .rx_valid(mcd_v), .rx_pkt(mcd_p),
    .rdy_valid, .rdy_kind, .rdy_id, .confirm, .rwr_done, .xp_full, .mon_en, .busy_init(init_busy),
    .n_hit(stats.hit), .n_miss(stats.miss), .n_swap(stats.swap), .n_stall(stats.stall),
    .n_xp_req(stats.xp_req), .n_dram_req(stats.dram_req));

  dram_dev u_dram (
    .clk, .rst_n, .rxf_valid(drf_v), .rxf_pkt(drf_p), .rxb_valid(drb_v), .rxb_pkt(drb_p),
    .tx_load(dr_load), .tx_pkt(dr_pkt), .tx_ready(dr_rdy),
    .c_valid, .c_cmd, .c_addr, .c_wdata, .c_wmeta, .c_rvalid, .c_rdata, .c_rmeta, .overflow(dr_ovf));

  xpoint_ctrl #(.AW(XP_AW), .TRD(TXRD), .TWR(TXWR), .PSI(PSI)) u_xp (
    .clk, .rst_n, .two_level(mode), .rx_valid(xpf_v), .rx_pkt(xpf_p),
    .tx_load(xp_load), .tx_pkt(xp_pkt), .tx_ready(xp_rdy),
    .rdy_valid, .rdy_kind, .rdy_id, .confirm, .rwr_done, .buf_full(xp_full),
    .m_en, .m_we, .m_addr, .m_wdata, .m_rdata,
    .n_evict(stats.evict), .n_swap(stats.swap_done), .n_rwr(stats.rwr), .n_gap(stats.gap));

  // ---------------- serializers ----------------
  logic mc_req, dr_req, xp_req, mc_gnt, dr_gnt, xp_gnt;
  logic mc_v, dr_v, xp_v, mc_last, dr_last, xp_last, mc_hcok, dr_hcok, xp_hcok;
  dev_e mc_dst, dr_dst, xp_dst;
  logic [VC_W-1:0] mc_flit, dr_flit, xp_flit;

  serializer u_s_mc (.clk, .rst_n, .load(mc_load), .pkt(mc_pkt), .ready(mc_rdy), .req(mc_req), .dst(mc_dst),
    .hc_ok(mc_hcok), .grant(mc_gnt), .valid(mc_v), .last(mc_last), .flit(mc_flit));
  serializer u_s_dr (.clk, .rst_n, .load(dr_load), .pkt(dr_pkt), .ready(dr_rdy), .req(dr_req), .dst(dr_dst),
    .hc_ok(dr_hcok), .grant(dr_gnt), .valid(dr_v), .last(dr_last), .flit(dr_flit));
  serializer u_s_xp (.clk, .rst_n, .load(xp_load), .pkt(xp_pkt), .ready(xp_rdy), .req(xp_req), .dst(xp_dst),
    .hc_ok(xp_hcok), .grant(xp_gnt), .valid(xp_v), .last(xp_last), .flit(xp_flit));

  logic overlay;
  channel_arbiter u_arb (
    .two_level(mode),
    .mc_req, .mc_dst, .mc_busy(mc_v), .dram_req(dr_req), .dram_busy(dr_v), .xp_req, .xp_busy(xp_v),
    .mc_grant(mc_gnt), .dram_grant(dr_gnt), .xp_grant(xp_gnt), .overlay);

  // ---------------- detectors and light ----------------
  logic mc_hc;
  rx_mode_e drf_m, xpf_m, drb_m, mcr_m;
  dev_e drf_s, xpf_s, drb_s, mcr_s;
  demux_ctrl u_dmx (
    .two_level(mode), .mc_act(mc_v), .mc_dst, .dram_act(dr_v), .dram_dst(dr_dst),
    .xp_act(xp_v), .xp_dst, .mon_en, .mc_hc,
    .dram_rxf_mode(drf_m), .dram_rxf_src(drf_s), .xp_rxf_mode(xpf_m), .xp_rxf_src(xpf_s),
    .dram_rxb_mode(drb_m), .dram_rxb_src(drb_s), .mc_rx_mode(mcr_m), .mc_rx_src(mcr_s));

  logic [VC_W-1:0] drf_bits, xpf_bits, drb_bits, mcr_bits;
  logic [VC_W-1:0][LVL_W-1:0] light_mc;
  optical_vchannel u_opt (
    .mc_tx_en(mc_v), .mc_tx_hc(mc_hc), .mc_tx_bits(mc_flit),
    .dram_tx_en(dr_v), .dram_tx_bits(dr_flit), .xp_tx_en(xp_v), .xp_tx_bits(xp_flit),
    .dram_rxf_mode(drf_m), .dram_rxf_hc(hc_of(drf_s)), .dram_rxf_bits(drf_bits),
    .xp_rxf_mode(xpf_m),   .xp_rxf_hc(hc_of(xpf_s)),   .xp_rxf_bits(xpf_bits),
    .dram_rxb_mode(drb_m), .dram_rxb_hc(hc_of(drb_s)), .dram_rxb_bits(drb_bits),
    .mc_rx_mode(mcr_m),    .mc_rx_hc(hc_of(mcr_s)),    .mc_rx_bits(mcr_bits),
    .light_at_mc_rx(light_mc));

  function automatic logic hc_of(dev_e s);
    return (s == D_MC) && mc_hc;
  endfunction
  function automatic logic v_of(dev_e s);
    unique case (s)
      D_MC:    return mc_v;
      D_DRAM:  return dr_v;
      D_XP:    return xp_v;
      default: return 1'b0;
    endcase
  endfunction

  // ---------------- deserializers ----------------
  logic e0, e1, e2, e3;
  deserializer u_d_drf (.clk, .rst_n, .valid(v_of(drf_s)), .flit(drf_bits), .pkt_valid(drf_v), .pkt(drf_p), .err(e0));
  deserializer u_d_xpf (.clk, .rst_n, .valid(v_of(xpf_s)), .flit(xpf_bits), .pkt_valid(xpf_v), .pkt(xpf_p), .err(e1));
  deserializer u_d_drb (.clk, .rst_n, .valid(v_of(drb_s)), .flit(drb_bits), .pkt_valid(drb_v), .pkt(drb_p), .err(e2));
  deserializer u_d_mcr (.clk, .rst_n, .valid(v_of(mcr_s)), .flit(mcr_bits), .pkt_valid(mcd_v), .pkt(mcd_p), .err(e3));

  // ---------------- mode register and counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= 1'b0; stats.mode_sw <= '0; stats.overlay <= '0; err <= 1'b0;
    end else begin
      mode <= two_level;
      if (two_level != mode && !init_busy) stats.mode_sw <= stats.mode_sw + 1;
      if (overlay) stats.overlay <= stats.overlay + 1;
      if (e0 || e1 || e2 || e3 || dr_ovf) err <= 1'b1;
    end
  end
endmodule
