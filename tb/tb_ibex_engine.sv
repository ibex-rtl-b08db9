// tb_ibex_engine: flow checks of the compression engine's sequencer.
//
// The sequencer is exercised inside the full controller (its cache, allocator,
// demotion engine and memory arbiter are the real blocks; device memory and the
// codec are the behavioural models), with the promoted region cut to 259 P-chunks
// so that every third promotion forces a demotion.  Besides checking all data
// against a reference copy, it watches the flows themselves:
//   * a promotion decompresses exactly the block's slot, 2*ceil(n/2) lines for a
//     block whose last nonzero line is n (the codec model's size rule);
//   * a clean demotion (page only read since promotion) runs no compression: the
//     shadow copies in the C-chunks are reused;
//   * the metadata cache misses on the first access to a page only;
//   * a zero-block read moves no data (checked while no demotion is pending).
module tb_ibex_engine;
  import ibex_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic              host_req_valid = 1'b0;
  logic              host_req_ready;
  logic              host_req_we = 1'b0;
  logic [OSPN_W-1:0] host_req_ospn = '0;
  logic [5:0]        host_req_line = '0;
  logic [LINE_W-1:0] host_req_wdata = '0;
  logic              host_resp_valid;
  logic [LINE_W-1:0] host_resp_rdata;
  logic              mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t          mem_req;
  logic [LINE_W-1:0] mem_resp_rdata;
  logic              cx_cmd_valid, cx_cmd_ready, cx_cmd_comp, cx_in_valid, cx_in_ready, cx_in_last;
  logic              cx_out_valid, cx_out_ready, cx_out_last;
  logic [LINE_W-1:0] cx_in_data, cx_out_data;
  codec_status_e     cx_out_status;
  logic [2:0]        cx_out_size;
  logic [31:0]       p_free, dem_cursor;
  logic              err_unsupported;
  logic              ev_md_miss, ev_zero_read, ev_promote, ev_no_promote, ev_demote_clean;
  logic              ev_demote_dirty, ev_wr_recompress, ev_lazy_touch, ev_random_pick, ev_probe_skip;
  int unsigned       n_reads, n_writes, n_comp, n_decomp, cx_lat;

  ibex_top #(
    .NUM_PCHUNKS  (259),
    .LOW_WATER    (256)
  ) dut (.*);

  tb_mem_model #(.LATENCY(4)) u_mem (
    .clk, .rst_n, .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_rdata,
    .n_reads, .n_writes
  );

  tb_codec_model u_cx (
    .clk, .rst_n, .cx_cmd_valid, .cx_cmd_ready, .cx_cmd_comp, .cx_in_valid, .cx_in_ready,
    .cx_in_data, .cx_in_last, .cx_out_valid, .cx_out_ready, .cx_out_data, .cx_out_last,
    .cx_out_status, .cx_out_size, .n_comp, .n_decomp, .last_latency(cx_lat)
  );

  // ------------------------------------------------------------ event counters
  int c_miss = 0, c_zero = 0, c_prom = 0, c_noprom = 0, c_clean = 0, c_dirty = 0;
  int c_wrc = 0, c_touch = 0, c_rand = 0, c_skip = 0, c_stall = 0;
  always @(posedge clk) if (rst_n) begin
    c_miss   += int'(ev_md_miss);
    c_zero   += int'(ev_zero_read);
    c_prom   += int'(ev_promote);
    c_noprom += int'(ev_no_promote);
    c_clean  += int'(ev_demote_clean);
    c_dirty  += int'(ev_demote_dirty);
    c_wrc    += int'(ev_wr_recompress);
    c_touch  += int'(ev_lazy_touch);
    c_rand   += int'(ev_random_pick);
    c_skip   += int'(ev_probe_skip);
    c_stall  += int'(host_req_valid && !host_req_ready && p_free < 256);
  end

  // ------------------------------------------------------------ reference model
  logic [LINE_W-1:0] ref_mem [int unsigned];

  function automatic logic [LINE_W-1:0] ref_rd(int unsigned ospn, int unsigned line);
    int unsigned k;
    k = ospn * 64 + line;
    return ref_mem.exists(k) ? ref_mem[k] : '0;
  endfunction

  function automatic logic [LINE_W-1:0] rnd_line();
    logic [LINE_W-1:0] v;
    for (int i = 0; i < LINE_W / 32; i++) v[32*i +: 32] = $urandom;
    v[0] = 1'b1;
    return v;
  endfunction

  task automatic host_op(input logic we, input int unsigned ospn, input int unsigned line,
                         input logic [LINE_W-1:0] wd, output logic [LINE_W-1:0] rd);
    int t;
    host_req_valid <= 1'b1;
    host_req_we    <= we;
    host_req_ospn  <= OSPN_W'(ospn);
    host_req_line  <= 6'(line);
    host_req_wdata <= wd;
    @(posedge clk);
    while (!host_req_ready) @(posedge clk);
    host_req_valid <= 1'b0;
    t = 0;
    do begin
      @(posedge clk);
      t++;
    end while (!host_resp_valid && t < 20000);
    if (!host_resp_valid) begin
      failures++;
      $display("no response: we=%0d ospn=%0d line=%0d", we, ospn, line);
    end
    rd = host_resp_rdata;
  endtask

  task automatic wr(input int unsigned ospn, input int unsigned line, input logic [LINE_W-1:0] d);
    logic [LINE_W-1:0] rd;
    host_op(1'b1, ospn, line, d, rd);
    ref_mem[ospn * 64 + line] = d;
  endtask

  task automatic rd_check(input int unsigned ospn, input int unsigned line);
    logic [LINE_W-1:0] rd;
    host_op(1'b0, ospn, line, '0, rd);
    checks++;
    if (rd !== ref_rd(ospn, line)) begin
      failures++;
      $display("data mismatch ospn=%0d line=%0d got %h exp %h", ospn, line, rd[63:0],
               ref_rd(ospn, line) & 64'hFFFF_FFFF_FFFF_FFFF);
    end
  endtask

  task automatic expect_count(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never happened: %s", what);
    end else $display("  %-26s %0d", what, n);
  endtask

  // ------------------------------------------------------------ flow checks
  // current host request, as seen by the flow monitors
  int unsigned cur_ospn, cur_line;
  int          dc_beats = -1;     // input beats of the running decompression
  int          dc_exp   = 0;
  int          comp_at_clean = -1;
  int          mem_at_req, reads_at_req;
  bit          seen [int unsigned];

  // lines the reference holds up to the last nonzero one of a block
  function automatic int blk_lines(int unsigned ospn, int unsigned b);
    int n;
    n = 0;
    for (int l = 0; l < 16; l++) if (ref_rd(ospn, b * 16 + l) != '0) n = l + 1;
    return n;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (cx_cmd_valid && cx_cmd_ready && !cx_cmd_comp) dc_beats = 0;
    if (cx_in_valid && cx_in_ready && dc_beats >= 0) begin
      dc_beats++;
      if (cx_in_last) begin
        checks++;
        if (dc_beats != dc_exp) begin
          failures++;
          $display("decompression of ospn %0d block %0d fetched %0d lines, expected %0d",
                   cur_ospn, cur_line / 16, dc_beats, dc_exp);
        end
        dc_beats = -1;
      end
    end
    // shadowed promotion: a clean demotion compresses nothing
    if (ev_demote_clean) comp_at_clean = int'(n_comp);
    if (comp_at_clean >= 0 && host_req_valid && host_req_ready) begin
      checks++;
      if (int'(n_comp) != comp_at_clean) begin
        failures++;
        $display("clean demotion ran the compressor");
      end
      comp_at_clean = -1;
    end
  end

  task automatic op(input bit we, input int unsigned ospn, input int unsigned line,
                    input logic [LINE_W-1:0] d);
    int miss0, zero0, r0, w0;
    bit first, quiet;
    cur_ospn = ospn;
    cur_line = line;
    // a decompression fetches exactly the slot: 2*ceil(n/2) lines
    dc_exp = 2 * ((blk_lines(ospn, line / 16) + 1) / 2);
    first  = !seen.exists(ospn);
    seen[ospn] = 1;
    miss0 = c_miss;
    zero0 = c_zero;
    r0 = int'(n_reads);
    w0 = int'(n_writes);
    quiet = (p_free >= 256);    // no background demotion can run
    if (we) wr(ospn, line, d); else rd_check(ospn, line);
    // metadata: missed exactly on the first access (the cache holds 3072 pages)
    checks++;
    if ((c_miss - miss0) != int'(first)) begin
      failures++;
      $display("metadata miss count %0d on access to ospn %0d (first=%0d)", c_miss - miss0, ospn, first);
    end
    // a zero-block read touches nothing but the metadata
    if (c_zero != zero0 && quiet) begin
      checks++;
      if (int'(n_writes) != w0 || int'(n_reads) - r0 > int'(first)) begin
        failures++;
        $display("zero read moved data");
      end
    end
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);
    for (int n = 0; n < 1200; n++) begin
      int unsigned p, b, l, r;
      p = $urandom_range(7);
      b = $urandom_range(3);
      r = $urandom_range(99);
      // blocks of page p hold at most lim lines: mixes sizes, raw and zero blocks
      l = $urandom_range(((p + b) % 4 == 0) ? 15 : ((p + b) % 4 == 1) ? 2 : ((p + b) % 4 == 2) ? 9 : 5);
      if (r < 50) op(1'b0, p, b * 16 + l, '0);
      else if ((p + b) % 4 == 3 && r < 60) op(1'b0, p, b * 16 + 15, '0);
      else op(1'b1, p, b * 16 + l, rnd_line());
    end
    foreach (ref_mem[k]) op(1'b0, k / 64, k % 64, '0);
    $display("mechanisms:");
    expect_count("promotion", c_prom);
    expect_count("clean demotion", c_clean);
    expect_count("dirty demotion (repack)", c_dirty);
    expect_count("compressions", int'(n_comp));
    expect_count("decompressions", int'(n_decomp));
    checks++;
    if (err_unsupported) begin failures++; $display("unexpected err_unsupported"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
