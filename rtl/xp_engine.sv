// xp_engine: scheduler and XPoint protocol engine of the XPoint controller.
//
// Requests come from three places: the internal port (swap sequencer and
// victim write-backs, highest priority), the write buffer and the read buffer.
// Writes are taken before reads so that a read never overtakes a write to the
// same line still sitting in the buffer (own choice; the paper gives the
// buffers and a scheduler but not its policy). Every line address goes through
// start_gap (address translation with wear levelling). When start_gap asks for
// a gap move the engine copies one line (read then write) before anything else.
// The media port is a plain synchronous array port (read data the next clock);
// the engine itself holds each access for the XPoint latencies of the paper,
// TRD (190 ns) for a read and TWR (763 ns) for a write, at 1 ns per clock.
// Responses: rsp_valid for one clock with the line, the request id and whether
// it came from the internal port.
module xp_engine
  import ohm_pkg::*;
#(
  parameter int unsigned AW  = 30,
  parameter int unsigned TRD = T_XP_RD,
  parameter int unsigned TWR = T_XP_WR,
  parameter int unsigned PSI = 100
) (
  input  logic              clk,
  input  logic              rst_n,
  // internal port
  input  logic              int_valid,
  input  logic              int_we,
  input  logic [AW-1:0]     int_addr,
  input  logic [LINE_W-1:0] int_wdata,
  output logic              int_ready,
  // read buffer head
  input  logic              rd_valid,
  input  logic [AW-1:0]     rd_addr,
  input  logic [7:0]        rd_id,
  output logic              rd_pop,
  // write buffer head
  input  logic              wr_valid,
  input  logic [AW-1:0]     wr_addr,
  input  logic [LINE_W-1:0] wr_data,
  output logic              wr_pop,
  // responses
  output logic              rsp_valid,
  output logic              rsp_int,
  output logic [7:0]        rsp_id,
  output logic [AW-1:0]     rsp_addr,
  output logic [LINE_W-1:0] rsp_data,
  // media
  output logic              m_en,
  output logic              m_we,
  output logic [AW:0]       m_addr,
  output logic [LINE_W-1:0] m_wdata,
  input  logic [LINE_W-1:0] m_rdata,
  output logic [31:0]       n_gap_moves
);
  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_MV_RD, S_MV_WR} st_e;
  st_e st;
  logic [15:0] tmr;
  logic cur_we, cur_int, cur_rsp;
  logic [7:0] cur_id;
  logic [AW-1:0] cur_la;
  logic [LINE_W-1:0] mv_buf;
  logic sg_write, mv_req, mv_done;
  logic [AW:0] mv_src, mv_dst, pa;
  logic [AW-1:0] la_sel;
  logic take_int, take_wr, take_rd;

  always_comb begin
    take_int = 1'b0; take_wr = 1'b0; take_rd = 1'b0;
    if (st == S_IDLE && !mv_req) begin
      if (int_valid)     take_int = 1'b1;
      else if (wr_valid) take_wr  = 1'b1;
      else if (rd_valid) take_rd  = 1'b1;
    end
    la_sel = take_int ? int_addr : take_wr ? wr_addr : rd_addr;
  end

  start_gap #(.AW(AW), .PSI(PSI)) u_sg (
    .clk, .rst_n, .la(la_sel), .pa, .write(sg_write),
    .move_req(mv_req), .move_src(mv_src), .move_dst(mv_dst), .move_done(mv_done));

  assign mv_done   = (st == S_MV_WR) && (tmr == 0);
  assign int_ready = take_int;
  assign rd_pop    = take_rd;
  assign wr_pop    = take_wr;
  assign sg_write  = (take_int && int_we) || take_wr;

  always_comb begin
    m_en = 1'b0; m_we = 1'b0; m_addr = pa; m_wdata = take_int ? int_wdata : wr_data;
    if (take_int || take_wr || take_rd) begin
      m_en = 1'b1; m_we = (take_int && int_we) || take_wr;
    end else if (st == S_IDLE && mv_req) begin
      m_en = 1'b1; m_addr = mv_src;
    end else if (st == S_MV_RD && tmr == 0) begin
      m_en = 1'b1; m_we = 1'b1; m_addr = mv_dst; m_wdata = mv_buf;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; tmr <= '0; cur_we <= 1'b0; cur_int <= 1'b0; cur_rsp <= 1'b0; cur_id <= '0;
      cur_la <= '0; mv_buf <= '0; rsp_valid <= 1'b0; rsp_int <= 1'b0; rsp_id <= '0;
      rsp_addr <= '0; rsp_data <= '0; n_gap_moves <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (st)
        S_IDLE: begin
          if (take_int || take_wr || take_rd) begin
            st      <= S_WAIT;
            cur_we  <= (take_int && int_we) || take_wr;
            cur_int <= take_int;
            cur_rsp <= !((take_int && int_we) || take_wr) ;
            cur_id  <= take_rd ? rd_id : 8'h0;
            cur_la  <= la_sel;
            tmr     <= 16'((((take_int && int_we) || take_wr) ? TWR : TRD) - 1);
          end else if (mv_req) begin
            st  <= S_MV_RD;
            tmr <= 16'(TRD - 1);
          end
        end
        S_WAIT: begin
          if (tmr == 16'(TRD - 1) && !cur_we) rsp_data <= m_rdata;  // data of the first clock
          if (tmr == 0) begin
            st        <= S_IDLE;
            rsp_valid <= cur_rsp;
            rsp_int   <= cur_int;
            rsp_id    <= cur_id;
            rsp_addr  <= cur_la;
          end else tmr <= tmr - 1'b1;
        end
        S_MV_RD: begin
          if (tmr == 16'(TRD - 1)) mv_buf <= m_rdata;
          if (tmr == 0) begin st <= S_MV_WR; tmr <= 16'(TWR - 1); end
          else tmr <= tmr - 1'b1;
        end
        S_MV_WR: begin
          if (tmr == 0) begin st <= S_IDLE; n_gap_moves <= n_gap_moves + 1; end
          else tmr <= tmr - 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
