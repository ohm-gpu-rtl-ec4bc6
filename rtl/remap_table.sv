// remap_table: mapping table of the planar memory mode.
//
// In planar mode DRAM and XPoint form one address space. It is cut into
// groups; each group holds one DRAM page and M XPoint pages (M=8 for the 1:8
// capacity ratio). Logical page P belongs to group P mod G as member P div G;
// member 0's home is the DRAM page, member k's home is the group's XPoint slot k.
// The table records per group which member currently sits in DRAM (dm). With
// dm=k: member k is in DRAM, member 0 is in XPoint slot k, the others are home.
// This keeps one small field per group, as the paper's "simplified mapping
// table" does; the exact layout is this design's.
//
// Hot-page detection (own choice, the paper only says a page with intensive
// accesses is hot): per group a candidate member and a saturating counter of
// accesses that went to XPoint. When a member reaches HOT_TH accesses, hot
// pulses with a swap plan: exchange the DRAM page with XPoint slot
// swap_slot, after which dm becomes swap_new. If dm is not 0 the plan first
// sends the current DRAM page home (swap_new=0); the next hot event then brings
// the new page in. commit applies a finished swap.
// Lookup is combinational. After reset the table is cleared one entry per
// clock; busy is high until then and no access may be made.
module remap_table #(
  parameter int unsigned G_W    = 18,   // 2^18 groups = 1 GB of 4 KB DRAM pages
  parameter int unsigned M      = 8,    // XPoint pages per group
  parameter int unsigned HOT_TH = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 busy,
  // lookup
  input  logic [G_W-1:0]       grp,
  input  logic [3:0]           member,
  output logic                 in_dram,
  output logic [3:0]           xp_slot,   // 1..M when in XPoint
  // access accounting
  input  logic                 access,
  output logic                 hot,
  output logic [G_W-1:0]       hot_grp,
  output logic [3:0]           swap_slot,
  output logic [3:0]           swap_new,
  // swap done
  input  logic                 commit,
  input  logic [G_W-1:0]       commit_grp,
  input  logic [3:0]           commit_new
);
  typedef struct packed {
    logic [3:0] dm;
    logic [3:0] cand;
    logic [2:0] cnt;
  } ent_t;

  ent_t tbl [2**G_W];
  ent_t e;
  logic [G_W:0] clr;

  assign busy = !clr[G_W];
  assign e = tbl[grp];

  always_comb begin
    in_dram = (member == e.dm);
    if (in_dram)          xp_slot = '0;
    else if (member == 0) xp_slot = e.dm;
    else                  xp_slot = member;
  end

  always_ff @(posedge clk) begin
    if (busy) begin
      tbl[clr[G_W-1:0]] <= '0;
    end else if (commit) begin
      tbl[commit_grp].dm   <= commit_new;
      tbl[commit_grp].cnt  <= '0;
    end else if (access && !in_dram) begin
      if (e.cand == member) begin
        if (e.cnt != 3'h7) tbl[grp].cnt <= e.cnt + 1'b1;
      end else begin
        tbl[grp].cand <= member;
        tbl[grp].cnt  <= 3'd1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr <= '0; hot <= 1'b0; hot_grp <= '0; swap_slot <= '0; swap_new <= '0;
    end else begin
      if (busy) clr <= clr + 1'b1;
      hot <= 1'b0;
      if (!busy && !commit && access && !in_dram && e.cand == member && 32'(e.cnt) + 1 >= HOT_TH) begin
        hot       <= 1'b1;
        hot_grp   <= grp;
        swap_slot <= (e.dm != 0) ? e.dm : member;
        swap_new  <= (e.dm != 0) ? 4'd0 : member;
      end
    end
  end
endmodule
