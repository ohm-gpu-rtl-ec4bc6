// ohm_top: Ohm memory system of one GPU: N_VC virtual channels on one optical
// waveguide, each joining one memory controller to its DRAM and XPoint device.
//
// The 96 wavelengths of the waveguide are split statically into N_VC = 6
// channels of VC_W = 16 wavelengths, one per GPU memory controller, so the
// channels share no light and are independent instances of ohm_vc. The GPU
// side (L2 slices), the DRAM chips and the XPoint media are outside the design
// and appear as per-channel port arrays. Mode select is per channel.
// Follows the paper: 6 channels x 16 bits, static division, one DRAM and XPoint
// device pair per channel, planar 1:8 and two-level ratios. This design's
// choices: per-channel mode input, the counters in stats.
module ohm_top
  import ohm_pkg::*;
#(
  parameter int unsigned NV     = N_VC,
  parameter int unsigned IDX_W  = 24,    // 1 GB DRAM per channel
  parameter int unsigned G_W    = 18,
  parameter int unsigned M      = 8,
  parameter int unsigned XP_AW  = 30,    // 64 GB XPoint address space per channel
  parameter int unsigned HOT_TH = 4,
  parameter int unsigned PSI    = 100,
  parameter int unsigned TXRD   = T_XP_RD,
  parameter int unsigned TXWR   = T_XP_WR
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NV-1:0]             two_level,
  input  logic [NV-1:0]             req_valid,
  output logic [NV-1:0]             req_ready,
  input  logic [NV-1:0]             req_we,
  input  logic [NV-1:0][ADDR_W-1:0] req_addr,
  input  logic [NV-1:0][LINE_W-1:0] req_wdata,
  input  logic [NV-1:0][7:0]        req_id,
  output logic [NV-1:0]             rsp_valid,
  output logic [NV-1:0]             rsp_we,
  output logic [NV-1:0][7:0]        rsp_id,
  output logic [NV-1:0][LINE_W-1:0] rsp_data,
  output logic [NV-1:0]             c_valid,
  output cmd_e [NV-1:0]             c_cmd,
  output logic [NV-1:0][ADDR_W-1:0] c_addr,
  output logic [NV-1:0][LINE_W-1:0] c_wdata,
  output meta_t [NV-1:0]            c_wmeta,
  input  logic [NV-1:0]             c_rvalid,
  input  logic [NV-1:0][LINE_W-1:0] c_rdata,
  input  meta_t [NV-1:0]            c_rmeta,
  output logic [NV-1:0]             m_en,
  output logic [NV-1:0]             m_we,
  output logic [NV-1:0][XP_AW:0]    m_addr,
  output logic [NV-1:0][LINE_W-1:0] m_wdata,
  input  logic [NV-1:0][LINE_W-1:0] m_rdata,
  output logic [NV-1:0]             init_busy,
  output logic [NV-1:0]             err,
  output vc_stats_t [NV-1:0]        stats
);
  for (genvar v = 0; v < NV; v++) begin : g_vc
    ohm_vc #(.IDX_W(IDX_W), .G_W(G_W), .M(M), .XP_AW(XP_AW), .HOT_TH(HOT_TH), .PSI(PSI),
             .TXRD(TXRD), .TXWR(TXWR)) u_vc (
      .clk, .rst_n, .two_level(two_level[v]),
      .req_valid(req_valid[v]), .req_ready(req_ready[v]), .req_we(req_we[v]), .req_addr(req_addr[v]),
      .req_wdata(req_wdata[v]), .req_id(req_id[v]),
      .rsp_valid(rsp_valid[v]), .rsp_we(rsp_we[v]), .rsp_id(rsp_id[v]), .rsp_data(rsp_data[v]),
      .c_valid(c_valid[v]), .c_cmd(c_cmd[v]), .c_addr(c_addr[v]), .c_wdata(c_wdata[v]), .c_wmeta(c_wmeta[v]),
      .c_rvalid(c_rvalid[v]), .c_rdata(c_rdata[v]), .c_rmeta(c_rmeta[v]),
      .m_en(m_en[v]), .m_we(m_we[v]), .m_addr(m_addr[v]), .m_wdata(m_wdata[v]), .m_rdata(m_rdata[v]),
      .init_busy(init_busy[v]), .err(err[v]), .stats(stats[v]));
  end
endmodule
