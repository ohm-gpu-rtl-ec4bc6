// xp_media_model: behavioural model of the XPoint media of one XPoint device,
// for simulation only.
//
// A plain synchronous array: when m_en is high a write stores m_wdata at
// m_addr, a read returns the line on m_rdata the next clock. Unwritten lines
// read as zero. The XPoint access times are kept by the controller, not here.
// The media is outside the Ohm-GPU design; its latency is applied by the
// controller, so this model's single-cycle read is a test choice.
module xp_media_model
  import ohm_pkg::*;
#(
  parameter int unsigned AW = 30
) (
  input  logic              clk,
  input  logic              m_en,
  input  logic              m_we,
  input  logic [AW:0]       m_addr,
  input  logic [LINE_W-1:0] m_wdata,
  output logic [LINE_W-1:0] m_rdata,
  output int                n_wr
);
  logic [LINE_W-1:0] mem [logic [AW:0]];
  initial n_wr = 0;
  always @(posedge clk) begin
    if (m_en) begin
      if (m_we) begin mem[m_addr] = m_wdata; n_wr <= n_wr + 1; end
      else m_rdata <= mem.exists(m_addr) ? mem[m_addr] : '0;
    end
  end
endmodule
