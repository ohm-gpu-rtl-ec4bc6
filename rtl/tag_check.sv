// tag_check: tag check of the direct-mapped DRAM cache (two-level mode).
//
// In two-level mode the DRAM is an inclusive, direct-mapped cache of XPoint.
// A line address splits into an index (which DRAM line) and a tag; the tag,
// a valid bit and a dirty bit are stored with the DRAM line itself (in its ECC
// region), so one DRAM read returns both data and metadata and no tag array is
// needed in the controller. The check compares the request tag with the
// metadata read back: hit when valid and equal. On a miss with a valid dirty
// line the old line must go back to XPoint; victim_addr rebuilds its address
// from the stored tag and the index. All of this follows the paper; the tag
// width default (6 bits for the 1:64 capacity ratio) is derived from it.
// Purely combinational.
module tag_check
  import ohm_pkg::*;
#(
  parameter int unsigned IDX_W = 24        // 1 GB of 64-byte DRAM lines per channel
) (
  input  logic [IDX_W+TAG_W-1:0] addr,
  input  meta_t                  meta,
  output logic [IDX_W-1:0]       index,
  output logic [TAG_W-1:0]       tag,
  output logic                   hit,
  output logic                   evict,       // miss on a valid dirty line
  output logic [IDX_W+TAG_W-1:0] victim_addr
);
  assign index       = addr[IDX_W-1:0];
  assign tag         = addr[IDX_W +: TAG_W];
  assign hit         = meta.valid && (meta.tag == tag);
  assign evict       = !hit && meta.valid && meta.dirty;
  assign victim_addr = {meta.tag, index};
endmodule
