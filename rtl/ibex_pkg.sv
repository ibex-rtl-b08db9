// ibex_pkg: shared types and constants of the compressed-memory controller.
//
// The central object is the 32-byte compacted metadata entry that translates one
// 4KB OS page (OSPN) to device memory.  Its field order and widths follow the
// compacted format: four 5-bit [block_type, block_size] pairs (one per 1KB block),
// num_chunks (3b), wr_cntr (4b), sub_region (4b) and eight chunk pointers, seven of
// 28 bits and a last one of 29 bits so that it can also hold a 4KB P-chunk pointer.
// 20+3+4+4+225 = 256 bits.  The field order inside the 256-bit word (first field
// at the MSB end), the type encoding and the reuse of wr_cntr in pages that own
// a P-chunk are choices of this design.
//
// Device addresses are 41 bits (2TB).  A C-chunk is 512B and is addressed as
// {sub_region, ptr28, 9'b0}; a P-chunk is 4KB and is addressed as {ptr29, 12'b0}.
// All device memory traffic uses 64-byte lines.
package ibex_pkg;

  localparam int unsigned ADDR_W     = 41;   // 2TB device physical address
  localparam int unsigned OSPN_W     = 30;   // OS page number (activity entry field)
  localparam int unsigned LINE_W     = 512;  // 64B access granularity
  localparam int unsigned STRB_W     = LINE_W / 8;
  localparam int unsigned CPTR_W     = 28;   // C-chunk pointer inside a sub-region
  localparam int unsigned PPTR_W     = 29;   // P-chunk pointer (4KB units)
  localparam int unsigned SUBR_W     = 4;    // sub-region number
  localparam int unsigned NBLK       = 4;    // 1KB blocks per 4KB page
  localparam int unsigned NPTR       = 8;    // chunk pointers per entry
  localparam int unsigned CHUNK_UNITS = 4;   // 128B units per 512B C-chunk
  localparam int unsigned BLK_LINES  = 16;   // 64B lines per 1KB block
  localparam int unsigned WR_THRESH  = 16;   // writes before an incompressible block is retried

  // Compression status of a 1KB block.
  typedef enum logic [1:0] {
    BT_ZERO   = 2'd0,   // all zeros, no storage
    BT_COMP   = 2'd1,   // compressed, (size+1)*128B slot in the C-chunks
    BT_PROM   = 2'd2,   // promoted, uncompressed in the page's P-chunk
    BT_INCOMP = 2'd3    // incompressible, stored raw in a 1KB slot (size field = 7)
  } blk_type_e;

  typedef struct packed {
    blk_type_e  btype;
    logic [2:0] bsize;     // slot size is (bsize+1)*128B
  } blk_info_t;

  typedef struct packed {
    blk_info_t [NBLK-1:0]            blk;         // [3]..[0], 20b
    logic [2:0]                      num_chunks;  // allocated C-chunks, 8 wraps to 0
    logic [3:0]                      wr_cntr;     // see note below
    logic [SUBR_W-1:0]               sub_region;
    logic [PPTR_W-1:0]               ptr7;        // 8th C-chunk, or the P-chunk
    logic [NPTR-2:0][CPTR_W-1:0]     ptr;         // ptr[6]..ptr[0]
  } md_entry_t;

  // wr_cntr in a page that owns a P-chunk (some block is BT_PROM):
  //   [3]   page dirty: a promoted block was written, shadow copies are stale
  //   [2:0] block i (i<3) was promoted from zero and has no C-chunk slot
  // otherwise it counts writes to incompressible blocks.
  localparam int unsigned WC_DIRTY = 3;

  // One 4B entry of the page activity region, indexed by P-chunk number.
  typedef struct packed {
    logic              allocated;
    logic [OSPN_W-1:0] ospn;
    logic              referenced;
  } act_entry_t;

  // Device memory request (one 64B line) and response.
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;    // 64B aligned
    logic [LINE_W-1:0] wdata;
    logic [STRB_W-1:0] wstrb;
  } mem_req_t;

  // Codec output status.
  typedef enum logic [1:0] {
    CS_ZERO = 2'd0,
    CS_COMP = 2'd1,
    CS_RAW  = 2'd2
  } codec_status_e;

  // Metadata cache operations.
  typedef enum logic [1:0] {
    MC_LOOKUP = 2'd0,  // read, LRU update on hit
    MC_PROBE  = 2'd1,  // read, no LRU update
    MC_FILL   = 2'd2,  // insert clean entry, may evict
    MC_WRITE  = 2'd3   // overwrite a resident entry and mark it dirty
  } mc_op_e;

  // Chunk allocator operations.
  typedef enum logic [1:0] {
    AL_POP_P  = 2'd0,
    AL_PUSH_P = 2'd1,
    AL_POP_C  = 2'd2,
    AL_PUSH_C = 2'd3
  } al_op_e;

  // Demotion engine operations.
  typedef enum logic [1:0] {
    DE_TOUCH = 2'd0,   // lazy reference-bit set on metadata eviction
    DE_ALLOC = 2'd1,   // P-chunk assigned to a page
    DE_FREE  = 2'd2,   // P-chunk released
    DE_SCAN  = 2'd3    // find a demotion candidate
  } de_op_e;

  function automatic logic page_has_p(md_entry_t m);
    logic r;
    r = 1'b0;
    for (int i = 0; i < NBLK; i++) if (m.blk[i].btype == BT_PROM) r = 1'b1;
    return r;
  endfunction

  // Does block b own a slot in the C-chunk layout?
  function automatic logic blk_has_slot(md_entry_t m, int unsigned b);
    logic r;
    unique case (m.blk[b].btype)
      BT_ZERO:   r = 1'b0;
      BT_COMP:   r = 1'b1;
      BT_INCOMP: r = 1'b1;
      BT_PROM:   r = (b < 3) ? !m.wr_cntr[b] : 1'b1;
      default:   r = 1'b0;
    endcase
    return r;
  endfunction

  // Offset of block b's slot, in 128B units, from the start of the page's chunks.
  // Slots are packed in block order.
  function automatic logic [5:0] slot_offset(md_entry_t m, int unsigned b);
    logic [5:0] off;
    off = '0;
    for (int unsigned j = 0; j < NBLK; j++)
      if (j < b && blk_has_slot(m, j)) off = off + 6'(m.blk[j].bsize) + 6'd1;
    return off;
  endfunction

  // Total 128B units used by the page's layout (block 3 included).
  function automatic logic [5:0] used_units(md_entry_t m);
    return slot_offset(m, NBLK);
  endfunction

  function automatic logic [3:0] units_to_chunks(logic [5:0] u);
    return 4'((u + 6'd3) >> 2);
  endfunction

  // Device address of the 64B line 'half' of 128B unit u of the page's C layout.
  function automatic logic [ADDR_W-1:0] unit_line_addr(md_entry_t m, logic [5:0] u, logic half);
    logic [2:0]        c;
    logic [CPTR_W-1:0] p;
    c = u[4:2];
    p = (c == 3'd7) ? m.ptr7[CPTR_W-1:0] : m.ptr[c];
    return {m.sub_region, p, u[1:0], half, 6'b0};
  endfunction

  function automatic logic [ADDR_W-1:0] pchunk_line_addr(logic [PPTR_W-1:0] p,
                                                         logic [1:0] b, logic [3:0] l);
    return {p, b, l, 6'b0};
  endfunction

endpackage
