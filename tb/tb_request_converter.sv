// tb_request_converter: self-checking test of the metadata-to-address converter.
//
// Random metadata entries (random block types and size codes, random chunk
// pointers, sub-region and the per-block "no slot" marks of promoted pages) are
// applied with every block and line index.  The expected addresses are worked out
// here from the layout rules written out longhand: slots packed in block order at
// 128B granularity, a slot line at {sub_region, chunk pointer, 128B unit in the
// chunk, half, 6'b0}, a promoted line at {P-chunk pointer, block, line, 6'b0}.
// A handful of directed entries pin down the corner cases (8-chunk layout, a slot
// starting in the eighth chunk, page with a P-chunk).  Purely combinational DUT:
// outputs are sampled one time step after the inputs change.
module tb_request_converter;
  import ibex_pkg::*;

  int checks = 0;
  int failures = 0;

  md_entry_t         md;
  logic [1:0]        blk;
  logic [3:0]        idx;
  blk_type_e         btype;
  logic [ADDR_W-1:0] line_addr, slot_addr;
  logic [4:0]        fetch_lines;
  logic [3:0]        used_chunks;
  logic              can_promote;

  request_converter dut (.*);

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // independent model
  function automatic bit has_slot(md_entry_t m, int b);
    unique case (m.blk[b].btype)
      BT_COMP, BT_INCOMP: return 1;
      BT_PROM: return (b == 3) || !m.wr_cntr[b];
      default: return 0;
    endcase
  endfunction

  task automatic run_entry(input md_entry_t m);
    int units, off, u, chunk, total;
    bit anyp;
    logic [27:0] cp;
    md = m;
    total = 0;
    anyp = 0;
    for (int b = 0; b < 4; b++) begin
      if (has_slot(m, b)) total += m.blk[b].bsize + 1;
      if (m.blk[b].btype == BT_PROM) anyp = 1;
    end
    for (int b = 0; b < 4; b++) begin
      off = 0;
      for (int j = 0; j < b; j++) if (has_slot(m, j)) off += m.blk[j].bsize + 1;
      for (int i = 0; i < 16; i++) begin
        logic [ADDR_W-1:0] exp_slot, exp_line;
        blk = 2'(b);
        idx = 4'(i);
        #1;
        u     = off + i / 2;
        chunk = (u / 4) % 8;
        cp    = (chunk == 7) ? m.ptr7[27:0] : m.ptr[chunk];
        exp_slot = ADDR_W'(m.sub_region) * (ADDR_W'(1) << 37) + ADDR_W'(cp) * 512 +
                   ADDR_W'(u % 4) * 128 + ADDR_W'(i % 2) * 64;
        exp_line = (m.blk[b].btype == BT_PROM) ?
                   ADDR_W'(m.ptr7) * 4096 + ADDR_W'(b) * 1024 + ADDR_W'(i) * 64 : exp_slot;
        check("btype", btype == m.blk[b].btype);
        if (i < 2 * (m.blk[b].bsize + 1))
          check($sformatf("slot_addr b=%0d i=%0d: %h vs %h", b, i, slot_addr, exp_slot), slot_addr == exp_slot);
        if (m.blk[b].btype == BT_PROM || (m.blk[b].btype == BT_INCOMP && has_slot(m, b)))
          check($sformatf("line_addr b=%0d i=%0d", b, i), line_addr == exp_line);
        check("fetch_lines", fetch_lines == 5'(2 * (m.blk[b].bsize + 1)));
        check($sformatf("used_chunks %0d vs %0d", used_chunks, (total + 3) / 4), used_chunks == 4'((total + 3) / 4));
        check("can_promote", can_promote == (anyp || (total + 3) / 4 <= 7));
      end
    end
  endtask

  function automatic md_entry_t rnd_md();
    md_entry_t m;
    for (int i = 0; i < 8; i++) m[32*i +: 32] = $urandom;
    for (int b = 0; b < 4; b++)
      if (m.blk[b].btype == BT_INCOMP) m.blk[b].bsize = 3'd7;
    return m;
  endfunction

  initial begin
    md_entry_t m;
    md  = '0;
    blk = '0;
    idx = '0;
    #10;
    // directed: four raw 1KB blocks -> 8 chunks, block 3 in chunks 6 and 7
    m = rnd_md();
    for (int b = 0; b < 4; b++) m.blk[b] = '{btype: BT_INCOMP, bsize: 3'd7};
    run_entry(m);
    // three raw blocks + size 5 -> 30 units -> 8 chunks, cannot promote
    m.blk[3] = '{btype: BT_COMP, bsize: 3'd5};
    run_entry(m);
    check("8-chunk page cannot promote", !can_promote);
    // small blocks sharing one chunk
    m = rnd_md();
    m.blk[0] = '{btype: BT_COMP, bsize: 3'd0};
    m.blk[1] = '{btype: BT_ZERO, bsize: 3'd0};
    m.blk[2] = '{btype: BT_COMP, bsize: 3'd1};
    m.blk[3] = '{btype: BT_PROM, bsize: 3'd0};
    run_entry(m);
    // random
    for (int n = 0; n < 400; n++) run_entry(rnd_md());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
