// vc_driver: GPU-side traffic generator and scoreboard for one virtual channel,
// for simulation only.
//
// It plays two phases, one per memory mode (FIRST_2L picks the order), and
// changes two_level between them after the channel has drained.
//  Planar phase: writes two lines of every page of groups 1..3 (DRAM member 0
//  and XPoint members 1..8), reads them back, then reads one XPoint page HOT
//  times so that it becomes hot and is swapped; right behind those it sends
//  XPoint traffic to other groups (which shares the light with the swap) and
//  requests to the hot group and to DRAM (which must wait for the swap). It
//  then reads every line again: data must survive the swap.
//  Two-level phase: writes lines of tag 1, reads them (hits), writes lines of
//  tag 2 at the same cache indexes (the dirty tag-1 lines are evicted by the
//  XPoint controller), reads tag 1 (misses served by reverse write) and tag 2.
// Every read answer is compared with the last data written to that address in
// the current phase. One isolated XPoint read is timed: its latency must be at
// least the XPoint read time TXRD and at most TXRD + 400 clocks.
// checks/failures count the comparisons; done rises at the end.
// The two modes, the 1:8 planar grouping and the XPoint read latency come from
// the Ohm-GPU paper; the traffic mix, phases and address patterns are test choices.
module vc_driver
  import ohm_pkg::*;
#(
  parameter int unsigned IDX_W    = 24,
  parameter int unsigned G_W      = 18,
  parameter int unsigned TXRD     = T_XP_RD,
  parameter int unsigned HOT      = 6,
  parameter bit          FIRST_2L = 1'b0,
  parameter int unsigned SEED     = 1
) (
  input  logic              clk,
  input  logic              init_busy,
  output logic              two_level,
  output logic              req_valid,
  input  logic              req_ready,
  output logic              req_we,
  output logic [ADDR_W-1:0] req_addr,
  output logic [LINE_W-1:0] req_wdata,
  output logic [7:0]        req_id,
  input  logic              rsp_valid,
  input  logic              rsp_we,
  input  logic [7:0]        rsp_id,
  input  logic [LINE_W-1:0] rsp_data,
  output int                checks,
  output int                failures,
  output logic              done
);
  logic [LINE_W-1:0] ref_mem [logic [ADDR_W-1:0]];
  logic [LINE_W-1:0] exp_data [256];
  logic              exp_rd [256];
  logic              busy_id [256];
  longint            t_issue [256];
  int  outstanding;
  logic [7:0] next_id;
  longint cyc;
  int unsigned seed_v;

  initial begin
    checks = 0; failures = 0; done = 1'b0; outstanding = 0; next_id = '0; cyc = 0;
    req_valid = 1'b0; req_we = 1'b0; req_addr = '0; req_wdata = '0; req_id = '0;
    two_level = FIRST_2L;
    for (int i = 0; i < 256; i++) begin busy_id[i] = 1'b0; exp_rd[i] = 1'b0; end
    seed_v = $urandom(SEED);
  end

  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [LINE_W-1:0] rnd_line();
    logic [LINE_W-1:0] d;
    for (int i = 0; i < LINE_W / 32; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  function automatic logic [ADDR_W-1:0] p_addr(int member, int grp, int line);
    return (ADDR_W'(member) << (6 + G_W)) | (ADDR_W'(grp) << 6) | ADDR_W'(line);
  endfunction

  function automatic logic [ADDR_W-1:0] t_addr(int tag, int idx);
    return (ADDR_W'(tag) << IDX_W) | ADDR_W'(idx);
  endfunction

  // answer checking
  always @(negedge clk) begin
    if (rsp_valid) begin
      checks <= checks + 1;
      if (!busy_id[rsp_id]) begin
        failures <= failures + 1;
        $display("FAIL: answer for id %0d that is not outstanding", rsp_id);
      end else if (exp_rd[rsp_id] != !rsp_we) begin
        failures <= failures + 1;
        $display("FAIL: id %0d answered as %s", rsp_id, rsp_we ? "write" : "read");
      end else if (!rsp_we && rsp_data != exp_data[rsp_id]) begin
        failures <= failures + 1;
        $display("FAIL: id %0d read data %h expected %h", rsp_id, rsp_data[63:0], exp_data[rsp_id][63:0]);
      end
      busy_id[rsp_id] = 1'b0;
      outstanding = outstanding - 1;
    end
  end

  task automatic issue(input logic we, input logic [ADDR_W-1:0] a, output logic [7:0] id_o);
    // inputs change and outputs are looked at on the falling edge, away from
    // the rising edge where the design samples and updates
    @(negedge clk);
    while (busy_id[next_id]) @(negedge clk);
    id_o = next_id;
    next_id = next_id + 1;
    busy_id[id_o] = 1'b1;
    exp_rd[id_o]  = !we;
    t_issue[id_o] = cyc;
    outstanding   = outstanding + 1;
    req_valid = 1'b1; req_we = we; req_addr = a; req_id = id_o;
    if (we) begin
      logic [LINE_W-1:0] d;
      d = rnd_line();
      req_wdata = d;
      ref_mem[a] = d;
    end else begin
      exp_data[id_o] = ref_mem.exists(a) ? ref_mem[a] : '0;
    end
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  task automatic wr(input logic [ADDR_W-1:0] a);
    logic [7:0] id; issue(1'b1, a, id);
  endtask
  task automatic rd(input logic [ADDR_W-1:0] a);
    logic [7:0] id; issue(1'b0, a, id);
  endtask
  task automatic drain();
    while (outstanding != 0) @(posedge clk);
    repeat (3000) @(posedge clk);
  endtask

  task automatic planar_phase();
    logic [7:0] id;
    longint t0;
    ref_mem.delete();
    for (int g = 1; g <= 3; g++)
      for (int m = 0; m <= 8; m++) begin
        wr(p_addr(m, g, 0)); wr(p_addr(m, g, 5));
      end
    drain();
    repeat (60000) @(posedge clk);   // posted XPoint writes and gap moves finish
    // one isolated XPoint read, timed
    issue(1'b0, p_addr(2, 3, 5), id);
    t0 = t_issue[id];
    while (busy_id[id]) @(posedge clk);
    checks <= checks + 1;
    if (cyc - t0 < longint'(TXRD) || cyc - t0 > longint'(TXRD) + 400) begin
      failures <= failures + 1;
      $display("FAIL: XPoint read latency %0d clocks, expected %0d..%0d", cyc - t0, TXRD, TXRD + 400);
    end
    for (int g = 1; g <= 3; g++)
      for (int m = 0; m <= 8; m++) begin
        rd(p_addr(m, g, 0)); rd(p_addr(m, g, 5));
      end
    drain();
    // make member 3 of group 1 hot, then keep the channel busy
    for (int k = 0; k < HOT; k++) rd(p_addr(3, 1, 0));
    for (int k = 0; k < 12; k++) begin
      wr(p_addr(1 + k % 8, 2 + k % 2, 9 + k));
      rd(p_addr(1 + (k + 3) % 8, 2 + k % 2, 0));
    end
    wr(p_addr(3, 1, 7));
    rd(p_addr(0, 1, 5));
    wr(p_addr(0, 2, 7));
    for (int k = 0; k < 12; k++) begin
      wr(p_addr(1 + k % 8, 3, 20 + k));
      rd(p_addr(1 + k % 8, 2 + k % 2, 9 + k));
    end
    drain();
    foreach (ref_mem[a]) rd(a);
    drain();
  endtask

  task automatic two_level_phase();
    ref_mem.delete();
    for (int i = 0; i < 8; i++) wr(t_addr(1, i * 64 + i));
    for (int i = 0; i < 8; i++) rd(t_addr(1, i * 64 + i));
    drain();
    for (int i = 0; i < 8; i++) wr(t_addr(2, i * 64 + i));
    for (int i = 0; i < 8; i++) begin
      rd(t_addr(1, i * 64 + i));
      rd(t_addr(1, i * 64 + i + 128));   // same bank, other index: waits on the miss
    end
    for (int i = 0; i < 8; i++) rd(t_addr(2, i * 64 + i));
    drain();
    foreach (ref_mem[a]) rd(a);
    drain();
  endtask

  initial begin
    @(posedge clk);
    while (init_busy) @(posedge clk);
    repeat (5) @(posedge clk);
    if (FIRST_2L) two_level_phase(); else planar_phase();
    two_level = !FIRST_2L;
    repeat (10) @(posedge clk);
    if (FIRST_2L) planar_phase(); else two_level_phase();
    done = 1'b1;
  end
endmodule
