// start_gap: wear-levelling address translation of the XPoint controller.
//
// Instead of a mapping table kept in a DRAM buffer, the logical line address is
// shifted algebraically (the Start-Gap scheme the paper builds on): N logical
// lines live in N+1 physical lines, one of which, the gap, is empty.
//   physical = (logical + start) mod N, plus 1 if that is >= gap.
// Every PSI writes the gap moves down one line: the line just below the gap is
// copied into it (move_req with move_src -> move_dst; the caller performs the
// copy and answers move_done). When the gap reaches 0 the last line is copied
// to line 0, the gap returns to N and start advances, so over time every
// logical line visits every physical line. Translation is combinational; the
// write counter and gap register update on write/move_done.
// N and PSI are this design's choices (PSI=100 is the value the Start-Gap
// scheme uses); the paper only says the scheme periodically shifts addresses.
module start_gap #(
  parameter int unsigned AW  = 30,            // logical line address bits
  parameter longint unsigned N = 64'd1 << AW, // logical lines
  parameter int unsigned PSI = 100
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] la,
  output logic [AW:0]   pa,
  input  logic          write,       // a line write was accepted
  output logic          move_req,
  output logic [AW:0]   move_src,
  output logic [AW:0]   move_dst,
  input  logic          move_done
);
  logic [AW:0]   gap;
  logic [AW-1:0] start;
  logic [$clog2(PSI+1)-1:0] wcnt;
  logic [AW:0] sum, mod;

  always_comb begin
    sum = {1'b0, la} + {1'b0, start};
    mod = (sum >= (AW+1)'(N)) ? sum - (AW+1)'(N) : sum;
    pa  = (mod >= gap) ? mod + 1'b1 : mod;
  end

  assign move_req = (wcnt >= ($clog2(PSI+1))'(PSI));
  assign move_dst = gap;
  assign move_src = (gap == 0) ? (AW+1)'(N) : gap - 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gap <= (AW+1)'(N); start <= '0; wcnt <= '0;
    end else begin
      if (move_req && move_done) begin
        wcnt <= '0;
        if (gap == 0) begin
          gap   <= (AW+1)'(N);
          start <= (32'(start) + 1 == N) ? '0 : start + 1'b1;
        end else begin
          gap <= gap - 1'b1;
        end
      end else if (write && !move_req) begin
        wcnt <= wcnt + 1'b1;
      end
    end
  end
endmodule
