// tb_tag_check: self-checking test of the direct-mapped cache tag check.
// Random addresses and metadata (half of them with a matching tag): hit when
// valid and tags match, evict on a miss of a valid dirty line, victim address
// built from the stored tag and the index.
// Combinational block: each case is checked 1 ns after the inputs change.
// The valid, dirty and tag metadata in each line follow the paper; the 6-bit tag
// follows from the 1:64 ratio.
`timescale 1ns/1ps
module tb_tag_check;
  import ohm_pkg::*;
  localparam int IDX_W = 24;
  logic [IDX_W+TAG_W-1:0] a, va;
  meta_t m;
  logic [IDX_W-1:0] idx;
  logic [TAG_W-1:0] tg;
  logic hit, ev;
  int checks = 0, failures = 0;
  tag_check dut (.addr(a), .meta(m), .index(idx), .tag(tg), .hit, .evict(ev), .victim_addr(va));
  initial begin
    fork begin #100000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    for (int t = 0; t < 2000; t++) begin
      logic eh;
      a = (IDX_W+TAG_W)'($urandom);
      m = meta_t'($urandom);
      if (t % 2 == 0) m.tag = a[IDX_W +: TAG_W];
      #1;
      eh = m.valid && m.tag == a[IDX_W +: TAG_W];
      checks++;
      if (idx != a[IDX_W-1:0] || tg != a[IDX_W +: TAG_W] || hit != eh || ev != (!eh && m.valid && m.dirty)
          || va != {m.tag, a[IDX_W-1:0]}) begin
        failures++; $display("FAIL: addr %h meta %h hit %b evict %b victim %h", a, m, hit, ev, va);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
