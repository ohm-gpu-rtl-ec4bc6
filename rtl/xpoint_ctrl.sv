// xpoint_ctrl: XPoint controller, built as the logic layer of an XPoint device.
//
// It sits behind the XPoint device's detector/deserializer and in front of its
// serializer/modulator, and serves four kinds of work:
//  - DDR-T reads and writes from the memory controller (MC): writes go to the
//    write buffer, reads to the read buffer; the engine (scheduler, start-gap
//    wear levelling, media timing) serves them. Read data is not sent at once:
//    the controller raises ready (RDY_DATA) and sends after the MC confirms, as
//    DDR-T is asynchronous.
//  - Auto-read/write (two-level mode): its half-coupled detector snarfs the MC's
//    read of a DRAM cache line (which carries the requested tag) and the DRAM's
//    answer (line plus valid/dirty/tag metadata). If the line is valid, dirty
//    and of another tag, the controller writes it back to XPoint itself; the MC
//    never copies victims.
//  - Reverse write (two-level mode): an MC read sent here is a DRAM-cache miss.
//    With the line read, the controller raises ready (RDY_RWR), waits for the
//    confirmation, writes the line into DRAM (with valid, clean, tag) and pulses
//    rwr_done; the MC captures the same transfer with its DDR monitor.
//  - Swap (planar mode): SWAP-CMD starts the DDR sequence generator; when the
//    exchange is finished the controller raises ready (RDY_SWAP) and waits for
//    the confirmation.
// The functions and their handshakes are the paper's; buffer depths, the
// SWAP-CMD payload layout and the priority of swap traffic over responses are
// this design's. SWAP-CMD payload: data[39:0] DRAM line address, data[79:40]
// XPoint line address, data[95:80] number of lines.
module xpoint_ctrl
  import ohm_pkg::*;
#(
  parameter int unsigned AW  = 30,                 // XPoint line address bits
  parameter int unsigned TRD = T_XP_RD,
  parameter int unsigned TWR = T_XP_WR,
  parameter int unsigned PSI = 100,
  parameter int unsigned BUF_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              two_level,
  // from the forward detector
  input  logic              rx_valid,
  input  pkt_t              rx_pkt,
  // to the modulator
  output logic              tx_load,
  output pkt_t              tx_pkt,
  input  logic              tx_ready,
  // DDR-T side band
  output logic              rdy_valid,
  output rdy_e              rdy_kind,
  output logic [7:0]        rdy_id,
  input  logic              confirm,
  output logic              rwr_done,
  output logic              buf_full,    // side band: MC holds new requests
  // storage layers
  output logic              m_en,
  output logic              m_we,
  output logic [AW:0]       m_addr,
  output logic [LINE_W-1:0] m_wdata,
  input  logic [LINE_W-1:0] m_rdata,
  // event counters
  output logic [31:0]       n_evict,
  output logic [31:0]       n_swap,
  output logic [31:0]       n_rwr,
  output logic [31:0]       n_gap
);
  localparam int unsigned IDX_W = AW - TAG_W;
  localparam int unsigned RB_W  = AW + 8;
  localparam int unsigned WB_W  = AW + LINE_W;
  localparam int unsigned PKT_W = $bits(pkt_t);

  // ---------------- receive side ----------------
  logic rd_push, wr_push, rd_pop, wr_pop, rd_empty, wr_empty, rd_full, wr_full;
  logic [RB_W-1:0] rd_din, rd_dout;
  logic [WB_W-1:0] wr_din, wr_dout;
  logic [$clog2(BUF_DEPTH):0] rd_cnt, wr_cnt;

  // snarf state
  logic              sn_valid;
  logic [IDX_W-1:0]  sn_index;
  logic [TAG_W-1:0]  sn_tag;
  logic [IDX_W-1:0]  tc_index;
  logic [TAG_W-1:0]  tc_tag;
  logic              tc_hit, tc_evict;
  logic [AW-1:0]     tc_victim;
  logic              is_rdata_snarf, is_mc_rd_dram;

  assign is_mc_rd_dram  = rx_valid && two_level && rx_pkt.hdr.src == D_MC && rx_pkt.hdr.dst == D_DRAM
                          && rx_pkt.hdr.cmd == C_RD;
  assign is_rdata_snarf = rx_valid && two_level && rx_pkt.hdr.src == D_DRAM && rx_pkt.hdr.dst == D_MC
                          && rx_pkt.hdr.cmd == C_RDDATA && sn_valid && rx_pkt.hdr.addr[IDX_W-1:0] == sn_index;

  tag_check #(.IDX_W(IDX_W)) u_tc (
    .addr({sn_tag, sn_index}), .meta(rx_pkt.hdr.meta), .index(tc_index), .tag(tc_tag),
    .hit(tc_hit), .evict(tc_evict), .victim_addr(tc_victim));

  always_comb begin
    rd_push = rx_valid && rx_pkt.hdr.dst == D_XP && rx_pkt.hdr.cmd == C_RD;
    rd_din  = {rx_pkt.hdr.id, rx_pkt.hdr.addr[AW-1:0]};
    wr_push = 1'b0;
    wr_din  = {rx_pkt.data, rx_pkt.hdr.addr[AW-1:0]};
    if (rx_valid && rx_pkt.hdr.dst == D_XP && rx_pkt.hdr.cmd == C_WR) wr_push = 1'b1;
    if (is_rdata_snarf && tc_evict) begin
      wr_push = 1'b1;
      wr_din  = {rx_pkt.data, tc_victim};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sn_valid <= 1'b0; sn_index <= '0; sn_tag <= '0; n_evict <= '0;
    end else begin
      if (is_mc_rd_dram) begin
        sn_valid <= 1'b1; sn_index <= rx_pkt.hdr.addr[IDX_W-1:0]; sn_tag <= rx_pkt.hdr.meta.tag;
      end else if (is_rdata_snarf) begin
        sn_valid <= 1'b0;
        if (tc_evict) n_evict <= n_evict + 1;
      end
    end
  end

  sync_fifo #(.WIDTH(RB_W), .DEPTH(BUF_DEPTH)) u_rdbuf (
    .clk, .rst_n, .push(rd_push && !rd_full), .din(rd_din), .pop(rd_pop), .dout(rd_dout),
    .full(rd_full), .empty(rd_empty), .count(rd_cnt));
  sync_fifo #(.WIDTH(WB_W), .DEPTH(BUF_DEPTH)) u_wrbuf (
    .clk, .rst_n, .push(wr_push && !wr_full), .din(wr_din), .pop(wr_pop), .dout(wr_dout),
    .full(wr_full), .empty(wr_empty), .count(wr_cnt));

  // Flow control (this design's; the paper gives no credit scheme): the MC
  // stops sending while fewer than FC_MARGIN entries are free in either
  // buffer; the margin covers packets already on their way and snarf evictions.
  localparam int unsigned FC_MARGIN = 4;
  assign buf_full = (rd_cnt >= ($clog2(BUF_DEPTH)+1)'(BUF_DEPTH - FC_MARGIN))
                 || (wr_cnt >= ($clog2(BUF_DEPTH)+1)'(BUF_DEPTH - FC_MARGIN));

  // ---------------- swap sequencer and engine ----------------
  logic sg_start, sg_busy, sg_done, sg_tx_load, sg_tx_ready;
  pkt_t sg_tx_pkt;
  logic int_valid, int_we, int_ready;
  logic [AW-1:0] int_addr;
  logic [LINE_W-1:0] int_wdata;
  logic rsp_valid, rsp_int;
  logic [7:0] rsp_id;
  logic [AW-1:0] rsp_addr;
  logic [LINE_W-1:0] rsp_data;

  // A SWAP-CMD is held until the reads and writes that were already buffered
  // when it arrived have been served, so none of them sees a half-swapped page.
  // Later requests (to other pages; the MC holds back the swapped group) wait
  // behind the swap traffic in the engine.
  logic        sw_pend;
  logic [95:0] sw_cmd;
  logic [$clog2(BUF_DEPTH):0] sw_rd_left, sw_wr_left;
  logic swap_rx;
  assign swap_rx  = rx_valid && rx_pkt.hdr.dst == D_XP && rx_pkt.hdr.cmd == C_SWAP;
  assign sg_start = sw_pend && !sg_busy && sw_rd_left == 0 && sw_wr_left == 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sw_pend <= 1'b0; sw_cmd <= '0; sw_rd_left <= '0; sw_wr_left <= '0;
    end else if (swap_rx && !sw_pend) begin
      sw_pend <= 1'b1; sw_cmd <= rx_pkt.data[95:0];
      sw_rd_left <= rd_cnt - (rd_pop ? 1'b1 : 1'b0);
      sw_wr_left <= wr_cnt - (wr_pop ? 1'b1 : 1'b0);
    end else begin
      if (sg_start) sw_pend <= 1'b0;
      if (rd_pop && sw_rd_left != 0) sw_rd_left <= sw_rd_left - 1'b1;
      if (wr_pop && sw_wr_left != 0) sw_wr_left <= sw_wr_left - 1'b1;
    end
  end

  ddr_seq_gen #(.AW(AW)) u_seq (
    .clk, .rst_n, .start(sg_start), .dram_addr(sw_cmd[39:0]), .xp_addr(sw_cmd[40 +: AW]),
    .nlines(sw_cmd[95:80]), .busy(sg_busy), .done(sg_done),
    .tx_load(sg_tx_load), .tx_pkt(sg_tx_pkt), .tx_ready(sg_tx_ready),
    .rx_valid, .rx_pkt,
    .int_valid, .int_we, .int_addr, .int_wdata, .int_ready,
    .rsp_valid, .rsp_int, .rsp_data);

  xp_engine #(.AW(AW), .TRD(TRD), .TWR(TWR), .PSI(PSI)) u_eng (
    .clk, .rst_n,
    .int_valid, .int_we, .int_addr, .int_wdata, .int_ready,
    .rd_valid(!rd_empty), .rd_addr(rd_dout[AW-1:0]), .rd_id(rd_dout[AW +: 8]), .rd_pop,
    .wr_valid(!wr_empty), .wr_addr(wr_dout[AW-1:0]), .wr_data(wr_dout[AW +: LINE_W]), .wr_pop,
    .rsp_valid, .rsp_int, .rsp_id, .rsp_addr, .rsp_data,
    .m_en, .m_we, .m_addr, .m_wdata, .m_rdata, .n_gap_moves(n_gap));

  // ---------------- output buffer and DDR-T ----------------
  logic ob_push, ob_pop, ob_empty, ob_full;
  logic [$clog2(BUF_DEPTH):0] ob_cnt;
  pkt_t ob_din, ob_head;

  always_comb begin
    ob_din = '0;
    ob_din.hdr.src = D_XP;
    ob_din.hdr.id  = rsp_id;
    ob_din.data    = rsp_data;
    if (two_level) begin
      ob_din.hdr.cmd  = C_XWR;
      ob_din.hdr.dst  = D_DRAM;
      ob_din.hdr.addr = ADDR_W'(rsp_addr[IDX_W-1:0]);
      ob_din.hdr.meta = '{valid: 1'b1, dirty: 1'b0, tag: rsp_addr[IDX_W +: TAG_W]};
    end else begin
      ob_din.hdr.cmd  = C_RDDATA;
      ob_din.hdr.dst  = D_MC;
      ob_din.hdr.addr = ADDR_W'(rsp_addr);
    end
  end
  assign ob_push = rsp_valid && !rsp_int;

  sync_fifo #(.WIDTH(PKT_W), .DEPTH(BUF_DEPTH)) u_obuf (
    .clk, .rst_n, .push(ob_push && !ob_full), .din(ob_din), .pop(ob_pop), .dout(ob_head),
    .full(ob_full), .empty(ob_empty), .count(ob_cnt));

  typedef enum logic [2:0] {T_IDLE, T_WAITC, T_LOAD, T_SENT, T_COMPL} tst_e;
  tst_e tst;
  logic swap_done_pend, cur_rwr;
  logic [1:0] dly;

  assign sg_tx_ready = tx_ready && (tst != T_LOAD);
  assign ob_pop      = (tst == T_LOAD) && tx_ready;

  always_comb begin
    tx_load = 1'b0; tx_pkt = sg_tx_pkt;
    if (tst == T_LOAD && tx_ready) begin tx_load = 1'b1; tx_pkt = ob_head; end
    else if (sg_tx_load)           begin tx_load = 1'b1; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tst <= T_IDLE; rdy_valid <= 1'b0; rdy_kind <= RDY_DATA; rdy_id <= '0; rwr_done <= 1'b0;
      swap_done_pend <= 1'b0; cur_rwr <= 1'b0; dly <= '0; n_swap <= '0; n_rwr <= '0;
    end else begin
      rwr_done <= 1'b0;
      if (sg_done) swap_done_pend <= 1'b1;
      unique case (tst)
        T_IDLE: begin
          if (swap_done_pend || sg_done) begin
            rdy_valid <= 1'b1; rdy_kind <= RDY_SWAP; rdy_id <= '0; tst <= T_WAITC;
          end else if (!ob_empty) begin
            rdy_valid <= 1'b1;
            rdy_kind  <= (ob_head.hdr.cmd == C_XWR) ? RDY_RWR : RDY_DATA;
            rdy_id    <= ob_head.hdr.id;
            cur_rwr   <= (ob_head.hdr.cmd == C_XWR);
            tst       <= T_WAITC;
          end
        end
        T_WAITC: if (confirm) begin
          rdy_valid <= 1'b0;
          if (rdy_kind == RDY_SWAP) begin
            swap_done_pend <= 1'b0; n_swap <= n_swap + 1; tst <= T_IDLE;
          end else tst <= T_LOAD;
        end
        T_LOAD: if (tx_ready) tst <= T_SENT;
        T_SENT: if (tx_ready) begin dly <= 2'd3; tst <= cur_rwr ? T_COMPL : T_IDLE; end
        T_COMPL: begin
          if (dly == 0) begin rwr_done <= 1'b1; n_rwr <= n_rwr + 1; tst <= T_IDLE; end
          else dly <= dly - 1'b1;
        end
        default: tst <= T_IDLE;
      endcase
    end
  end

  a_one_swap: assert property (@(posedge clk) disable iff (!rst_n) swap_rx |-> !sw_pend && !sg_busy);
  a_rdbuf_room: assert property (@(posedge clk) disable iff (!rst_n) rd_push |-> !rd_full);
  a_wrbuf_room: assert property (@(posedge clk) disable iff (!rst_n) wr_push |-> !wr_full);
endmodule
