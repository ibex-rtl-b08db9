// request_converter: turns a metadata entry into device memory line addresses.
//
// Given the 32B metadata entry of a page, the 1KB block number 'blk' and a line
// index 'idx' (0..15), it computes:
//   * line_addr  - the line to touch for a direct access to line 'idx' of the block:
//                  inside the page's 4KB P-chunk for a promoted block, or inside
//                  the block's raw 1KB slot for an incompressible block;
//   * slot_addr  - the idx-th 64B line of the block's slot in the C-chunks, used to
//                  fetch a compressed block (idx < fetch_lines) or to write one;
//   * fetch_lines - how many lines hold the block's slot, 2*(block_size+1);
//   * used_chunks - C-chunks the page's layout occupies;
//   * can_promote - the page owns a P-chunk already, or ptr7 is free to take one.
// Slots of the four 1KB blocks are packed in block order at 128B granularity, so
// one 512B C-chunk can hold up to four small compressed blocks.  Packing in block
// order is this design's choice; the 128B alignment, the (s+1)*128B size code and
// the pointer layout follow the paper.  Purely combinational.
module request_converter
  import ibex_pkg::*;
(
  input  md_entry_t         md,
  input  logic [1:0]        blk,
  input  logic [3:0]        idx,
  output blk_type_e         btype,
  output logic [ADDR_W-1:0] line_addr,
  output logic [ADDR_W-1:0] slot_addr,
  output logic [4:0]        fetch_lines,
  output logic [3:0]        used_chunks,
  output logic              can_promote
);

  logic [5:0] off;
  logic [5:0] unit;

  always_comb begin
    btype       = md.blk[blk].btype;
    off         = slot_offset(md, 32'(blk));
    unit        = off + 6'(idx[3:1]);
    slot_addr   = unit_line_addr(md, unit, idx[0]);
    fetch_lines = 5'((4'(md.blk[blk].bsize) + 4'd1) << 1);
    used_chunks = units_to_chunks(used_units(md));
    can_promote = page_has_p(md) || (used_chunks <= 4'd7);
    if (btype == BT_PROM) line_addr = pchunk_line_addr(md.ptr7, blk, idx);
    else                  line_addr = slot_addr;
  end

endmodule
