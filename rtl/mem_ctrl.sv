// mem_ctrl: GPU memory controller of one virtual channel of the Ohm memory system.
//
// Requests from the GPU side (one 64-byte line each) wait in a request queue.
// The controller then works in one of two modes, chosen by two_level:
//  - Planar mode: DRAM and XPoint form one address space. remap_table says
//    whether the line's page is in DRAM or in which XPoint slot; DRAM accesses
//    go through the bank tracker (PRE/ACT with tRP/tRCD/tRRD) and then a RD/WR
//    packet; XPoint accesses are DDR-T packets answered later. When the table
//    reports a hot XPoint page, the controller opens the DRAM row of the group's
//    page and sends SWAP-CMD to the XPoint controller, which moves the data on
//    its own. Until the XPoint controller reports the swap done (ready, then
//    this controller's confirm), requests to that group or to DRAM are held
//    back (conflict detection); requests to other XPoint pages keep flowing, on
//    the same light as the swap traffic (dual route).
//  - Two-level mode: DRAM is a direct-mapped cache of XPoint with the tag,
//    valid and dirty bits stored with each DRAM line. A request reads the DRAM
//    line (the RD packet carries the request's tag so that the XPoint controller
//    can snarf it); tag_check decides. Read hit: answer. Read miss: send the read
//    to XPoint; the XPoint controller writes the line into DRAM itself (reverse
//    write) after a ready/confirm exchange, during which this controller stops
//    issuing and captures the line with its DDR monitor, then answers. Writes:
//    after the tag read, write the line into DRAM marked dirty. Victims are never
//    copied by this controller: the XPoint controller snarfs and evicts them.
//    Requests to the bank of an outstanding miss are held back; so are reads,
//    as this design tracks one outstanding miss.
// The request/response interface: req_* with valid/ready; rsp_* one clock per
// answered request (writes are answered when issued). DDR-T side band: rdy_*
// from the XPoint controller, confirm (one clock) and rwr_done back.
// Mechanisms and orderings are the paper's; the address split, the hot-page
// rule, queue depth and the one-request-at-a-time issue are this design's.
module mem_ctrl
  import ohm_pkg::*;
#(
  parameter int unsigned IDX_W  = 24,   // DRAM lines per channel (1 GB)
  parameter int unsigned G_W    = 18,   // planar groups (one 4 KB DRAM page each)
  parameter int unsigned M      = 8,    // XPoint pages per group (1:8)
  parameter int unsigned XP_AW  = 30,   // XPoint lines per channel
  parameter int unsigned NB     = 16,   // DRAM banks
  parameter int unsigned HOT_TH = 4,
  parameter int unsigned QDEPTH = 16
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
  // optical transmitter / receiver
  output logic              tx_load,
  output pkt_t              tx_pkt,
  input  logic              tx_ready,
  input  logic              rx_valid,
  input  pkt_t              rx_pkt,
  // DDR-T side band
  input  logic              rdy_valid,
  input  rdy_e              rdy_kind,
  input  logic [7:0]        rdy_id,
  output logic              confirm,
  input  logic              rwr_done,
  input  logic              xp_full,     // XPoint buffers nearly full
  output logic              mon_en,
  output logic              busy_init,
  // event counters
  output logic [31:0]       n_hit,
  output logic [31:0]       n_miss,
  output logic [31:0]       n_swap,
  output logic [31:0]       n_stall,
  output logic [31:0]       n_xp_req,
  output logic [31:0]       n_dram_req
);
  localparam int unsigned PL    = 6;                       // log2 lines per page / row
  localparam int unsigned BW    = $clog2(NB);
  localparam int unsigned ROW_W = IDX_W - PL - BW;
  localparam int unsigned Q_W   = 1 + ADDR_W + 8 + LINE_W;

  // ---------------- request queue ----------------
  logic q_pop, q_empty, q_full;
  logic [Q_W-1:0] q_head;
  logic [$clog2(QDEPTH):0] q_cnt;
  logic h_we;
  logic [ADDR_W-1:0] h_addr;
  logic [7:0] h_id;
  logic [LINE_W-1:0] h_data;

  assign req_ready = !q_full;
  sync_fifo #(.WIDTH(Q_W), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n, .push(req_valid && !q_full), .din({req_we, req_addr, req_id, req_wdata}),
    .pop(q_pop), .dout(q_head), .full(q_full), .empty(q_empty), .count(q_cnt));
  assign {h_we, h_addr, h_id, h_data} = q_head;

  // ---------------- planar mapping ----------------
  logic [G_W-1:0] h_grp;
  logic [3:0] h_member, rt_slot, hot_slot, hot_new;
  logic rt_busy, rt_in_dram, rt_access, rt_hot, rt_commit;
  logic [G_W-1:0] hot_grp_w;
  assign h_grp    = h_addr[PL +: G_W];
  assign h_member = h_addr[PL + G_W +: 4];

  logic              hp_valid;       // pending hot page to swap
  logic [G_W-1:0]    hp_grp;
  logic [3:0]        hp_slot, hp_new;
  logic              swap_busy;
  logic [G_W-1:0]    sw_grp;
  logic [3:0]        sw_new;

  remap_table #(.G_W(G_W), .M(M), .HOT_TH(HOT_TH)) u_rt (
    .clk, .rst_n, .busy(rt_busy), .grp(h_grp), .member(h_member), .in_dram(rt_in_dram),
    .xp_slot(rt_slot), .access(rt_access), .hot(rt_hot), .hot_grp(hot_grp_w),
    .swap_slot(hot_slot), .swap_new(hot_new),
    .commit(rt_commit), .commit_grp(sw_grp), .commit_new(sw_new));
  assign busy_init = rt_busy;

  // ---------------- DRAM bank tracker ----------------
  logic [IDX_W-1:0] d_addr;
  logic [1:0] bk_next;
  logic bk_can, bk_issue;
  ddr_bank_ctrl #(.NB(NB), .ROW_W(ROW_W)) u_bk (
    .clk, .rst_n, .bank(d_addr[PL +: BW]), .row(d_addr[PL+BW +: ROW_W]),
    .next_cmd(bk_next), .can_issue(bk_can), .issue(bk_issue));

  // ---------------- two-level tag check ----------------
  logic [IDX_W-1:0] tc_index;
  logic [TAG_W-1:0] tc_tag;
  logic tc_hit, tc_evict;
  logic [IDX_W+TAG_W-1:0] tc_victim;
  logic [ADDR_W-1:0] op_addr;
  tag_check #(.IDX_W(IDX_W)) u_tc (
    .addr(op_addr[IDX_W+TAG_W-1:0]), .meta(rx_pkt.hdr.meta), .index(tc_index), .tag(tc_tag),
    .hit(tc_hit), .evict(tc_evict), .victim_addr(tc_victim));

  // ---------------- DDR monitor ----------------
  logic              miss_pend;
  logic [IDX_W-1:0]  miss_index;
  logic mon_arm, mon_done, mon_ok;
  logic [LINE_W-1:0] mon_data;
  ddr_monitor u_mon (
    .clk, .rst_n, .arm(mon_arm), .addr(ADDR_W'(miss_index)), .pkt_valid(rx_valid), .pkt(rx_pkt),
    .rwr_done, .armed(mon_en), .done(mon_done), .ok(mon_ok), .data(mon_data));

  // ---------------- main state machine ----------------
  typedef enum logic [3:0] {M_INIT, M_IDLE, M_DDR, M_WAIT_DRD, M_SEND_XP, M_SWAP_SEND, M_MON} st_e;
  typedef enum logic [2:0] {P_RD, P_WR, P_2L_RD, P_2L_WR, P_2L_WB, P_SWAP} pur_e;
  st_e  st;
  pur_e pur;
  logic op_we;
  logic [7:0] op_id;
  logic [LINE_W-1:0] op_data;
  logic [XP_AW-1:0] x_addr;
  logic head_conflict;
  logic [IDX_W-1:0] h_dram_line, h_index;
  logic [XP_AW-1:0] h_xp_line;
  logic [7:0] rdy_id_q;

  assign h_dram_line = IDX_W'({h_grp, h_addr[PL-1:0]});
  assign h_index     = h_addr[IDX_W-1:0];
  assign h_xp_line   = XP_AW'({(XP_AW'(h_grp) * XP_AW'(M) + XP_AW'(rt_slot) - XP_AW'(1)), h_addr[PL-1:0]});

  always_comb begin
    // two-level: one outstanding miss at a time; while it is open, writes to
    // other banks proceed, reads (which could miss again) and same-bank
    // requests wait
    if (two_level) head_conflict = miss_pend && (!h_we || h_index[PL +: BW] == miss_index[PL +: BW]);
    else           head_conflict = swap_busy && (rt_in_dram || h_grp == sw_grp);
  end

  assign rt_access = (st == M_IDLE) && !two_level && q_pop;
  assign mon_arm   = (st == M_IDLE) && rdy_valid && rdy_kind == RDY_RWR && !confirm;
  assign rt_commit = (st == M_IDLE) && rdy_valid && rdy_kind == RDY_SWAP && !confirm;

  logic handle_rdy, start_swap, take_req;
  always_comb begin
    handle_rdy = (st == M_IDLE) && rdy_valid && !confirm;
    start_swap = (st == M_IDLE) && !handle_rdy && hp_valid && !swap_busy && !two_level && !xp_full;
    take_req   = (st == M_IDLE) && !handle_rdy && !start_swap && !q_empty && !head_conflict && !xp_full;
    q_pop      = take_req;
  end

  // responses: XPoint read data may arrive in any state
  logic xp_rsp;
  assign xp_rsp = rx_valid && rx_pkt.hdr.src == D_XP && rx_pkt.hdr.dst == D_MC && rx_pkt.hdr.cmd == C_RDDATA;

  // transmitter; a packet that answers a posted write waits for a clock in
  // which the response port is not taken by XPoint read data
  always_comb begin
    tx_load = 1'b0; tx_pkt = '0; tx_pkt.hdr.src = D_MC; bk_issue = 1'b0;
    unique case (st)
      M_DDR: if (tx_ready) begin
        tx_pkt.hdr.dst  = D_DRAM;
        tx_pkt.hdr.id   = op_id;
        tx_pkt.hdr.addr = ADDR_W'(d_addr);
        if (bk_next != 2'd0) begin
          if (bk_can) begin
            tx_load = 1'b1; bk_issue = 1'b1;
            tx_pkt.hdr.cmd = (bk_next == 2'd2) ? C_PRE : C_ACT;
          end
        end else if (pur != P_SWAP && bk_can && !((pur == P_WR || pur == P_2L_WB) && xp_rsp)) begin
          tx_load = 1'b1;
          unique case (pur)
            P_RD, P_2L_RD, P_2L_WR: tx_pkt.hdr.cmd = C_RD;
            default: begin tx_pkt.hdr.cmd = C_WR; tx_pkt.data = op_data; end
          endcase
          if (pur == P_2L_RD || pur == P_2L_WR) tx_pkt.hdr.meta.tag = op_addr[IDX_W +: TAG_W];
          if (pur == P_2L_WB) tx_pkt.hdr.meta = '{valid: 1'b1, dirty: 1'b1, tag: op_addr[IDX_W +: TAG_W]};
        end
      end
      M_SEND_XP: if (tx_ready && !(op_we && xp_rsp)) begin
        tx_load = 1'b1;
        tx_pkt.hdr.dst  = D_XP;
        tx_pkt.hdr.id   = op_id;
        tx_pkt.hdr.addr = ADDR_W'(x_addr);
        tx_pkt.hdr.cmd  = op_we ? C_WR : C_RD;
        tx_pkt.data     = op_data;
      end
      M_SWAP_SEND: if (tx_ready) begin
        tx_load = 1'b1;
        tx_pkt.hdr.dst  = D_XP;
        tx_pkt.hdr.cmd  = C_SWAP;
        tx_pkt.data[39:0]  = 40'(d_addr);
        tx_pkt.data[79:40] = 40'(x_addr);
        tx_pkt.data[95:80] = 16'(1 << PL);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_INIT; pur <= P_RD; op_we <= 1'b0; op_id <= '0; op_addr <= '0; op_data <= '0;
      d_addr <= '0; x_addr <= '0; confirm <= 1'b0;
      hp_valid <= 1'b0; hp_grp <= '0; hp_slot <= '0; hp_new <= '0;
      swap_busy <= 1'b0; sw_grp <= '0; sw_new <= '0; miss_pend <= 1'b0; miss_index <= '0;
      rsp_valid <= 1'b0; rsp_we <= 1'b0; rsp_id <= '0; rsp_data <= '0;
      n_hit <= '0; n_miss <= '0; n_swap <= '0; n_stall <= '0; n_xp_req <= '0; n_dram_req <= '0;
    end else begin
      confirm   <= 1'b0;
      rsp_valid <= 1'b0;
      if (rt_hot && !hp_valid) begin
        hp_valid <= 1'b1; hp_grp <= hot_grp_w; hp_slot <= hot_slot; hp_new <= hot_new;
      end
      if (xp_rsp) begin
        rsp_valid <= 1'b1; rsp_we <= 1'b0; rsp_id <= rx_pkt.hdr.id; rsp_data <= rx_pkt.data;
      end
      if (st == M_IDLE && !q_empty && head_conflict && !handle_rdy && !start_swap) n_stall <= n_stall + 1;

      unique case (st)
        M_INIT: if (!rt_busy) st <= M_IDLE;
        M_IDLE: begin
          if (handle_rdy) begin
            confirm <= 1'b1;
            if (rdy_kind == RDY_SWAP) begin swap_busy <= 1'b0; end
            if (rdy_kind == RDY_RWR)  st <= M_MON;
          end else if (start_swap) begin
            hp_valid  <= 1'b0;
            swap_busy <= 1'b1; sw_grp <= hp_grp; sw_new <= hp_new;
            d_addr    <= IDX_W'({hp_grp, {PL{1'b0}}});
            x_addr    <= XP_AW'({(XP_AW'(hp_grp) * XP_AW'(M) + XP_AW'(hp_slot) - XP_AW'(1)), {PL{1'b0}}});
            pur       <= P_SWAP;
            st        <= M_DDR;
            n_swap    <= n_swap + 1;
          end else if (take_req) begin
            op_we <= h_we; op_id <= h_id; op_addr <= h_addr; op_data <= h_data;
            if (two_level) begin
              d_addr <= h_index; pur <= h_we ? P_2L_WR : P_2L_RD; st <= M_DDR;
              n_dram_req <= n_dram_req + 1;
            end else if (rt_in_dram) begin
              d_addr <= h_dram_line; pur <= h_we ? P_WR : P_RD; st <= M_DDR;
              n_dram_req <= n_dram_req + 1;
            end else begin
              x_addr <= h_xp_line; st <= M_SEND_XP;
              n_xp_req <= n_xp_req + 1;
            end
          end
        end
        M_DDR: begin
          if (tx_load && !bk_issue) begin
            if (pur == P_RD || pur == P_2L_RD || pur == P_2L_WR) st <= M_WAIT_DRD;
            else begin
              st <= M_IDLE;
              rsp_valid <= 1'b1; rsp_we <= 1'b1; rsp_id <= op_id;
            end
          end else if (pur == P_SWAP && bk_next == 2'd0 && bk_can) begin
            st <= M_SWAP_SEND;
          end
        end
        M_SWAP_SEND: if (tx_load) st <= M_IDLE;
        M_SEND_XP: if (tx_load) begin
          st <= M_IDLE;
          if (op_we) begin rsp_valid <= 1'b1; rsp_we <= 1'b1; rsp_id <= op_id; end
        end
        M_WAIT_DRD: if (rx_valid && rx_pkt.hdr.src == D_DRAM && rx_pkt.hdr.cmd == C_RDDATA) begin
          if (pur == P_RD) begin
            rsp_valid <= 1'b1; rsp_we <= 1'b0; rsp_id <= op_id; rsp_data <= rx_pkt.data; st <= M_IDLE;
          end else if (pur == P_2L_WR) begin
            if (tc_hit) n_hit <= n_hit + 1; else n_miss <= n_miss + 1;
            pur <= P_2L_WB; st <= M_DDR;
          end else if (tc_hit) begin
            n_hit <= n_hit + 1;
            rsp_valid <= 1'b1; rsp_we <= 1'b0; rsp_id <= op_id; rsp_data <= rx_pkt.data; st <= M_IDLE;
          end else begin
            n_miss <= n_miss + 1;
            miss_pend <= 1'b1; miss_index <= op_addr[IDX_W-1:0];
            x_addr <= op_addr[XP_AW-1:0]; op_we <= 1'b0; n_xp_req <= n_xp_req + 1;
            st <= M_SEND_XP;
          end
        end
        M_MON: if (mon_done) begin
          miss_pend <= 1'b0;
          rsp_valid <= 1'b1; rsp_we <= 1'b0; rsp_id <= rdy_id_q; rsp_data <= mon_data;
          st <= M_IDLE;
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rdy_id_q <= '0;
    else if (handle_rdy) rdy_id_q <= rdy_id;
  end

  // the monitor must have seen the reverse-written line before rwr_done
  a_mon_ok: assert property (@(posedge clk) disable iff (!rst_n) mon_done |-> mon_ok);
endmodule
