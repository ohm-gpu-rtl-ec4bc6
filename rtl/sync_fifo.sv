// sync_fifo: single-clock first-in first-out buffer.
//
// Used for every queue and buffer of the memory system: the request queues of
// the memory controller, the read and write buffers of the XPoint controller and
// the input and output buffers placed in front of each memory device (16 KB in
// the paper; with 576-bit packets that is about 28 entries, rounded to 32 here).
// Interface: push/pop with full/empty; dout shows the oldest entry while not
// empty (first-word fall-through). A push and a pop in the same cycle are both
// taken. Pushing when full or popping when empty is a caller error, checked by
// assertions. Depth must be a power of two.
module sync_fifo #(
  parameter int unsigned WIDTH = 576,
  parameter int unsigned DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             full,
  output logic             empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  assign empty = (count == 0);
  assign full  = (count == DEPTH[AW:0]);
  assign dout  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
