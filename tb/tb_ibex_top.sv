// tb_ibex_top: end-to-end test of the compressed-memory controller.
//
// The controller is connected to a sparse device-memory model and to the toy
// block codec model.  The test keeps a reference copy of every 64B host line and
// checks every read against it, so data must survive promotion, demotion (clean
// and dirty), repacking and recompression.  The promoted region is reduced to 262
// P-chunks with the low-water mark at 256, so background demotion runs after a
// few promotions, and the metadata cache to 4 sets of 4 entries, so entries are
// evicted (write-back and lazy reference update).
//   directed : zero read; write promotes a zero block; a page whose layout fills
//              all eight C-chunks is read without promotion, and a write to its
//              compressed block repacks it with that block raw; sixteen writes to
//              an incompressible block trigger recompression, after which the page
//              can be promoted again.
//   random   : reads and writes over 24 pages with per-block fill levels that make
//              blocks compressible, incompressible or zero.
// Every mechanism is counted and a mechanism that never happened is a failure.
module tb_ibex_top;
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
    .NUM_PCHUNKS  (262),
    .LOW_WATER    (256),
    .MC_SIZE_BYTES(512),
    .MC_WAYS      (4)
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
  int c_wrc = 0, c_touch = 0, c_rand = 0, c_skip = 0, c_stall = 0, c_merge = 0;
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

  // ------------------------------------------------------------ stimulus
  localparam int unsigned PG = 40;    // page driven to eight C-chunks
  int unsigned lim [int unsigned];     // fill level per (page, block)

  initial begin
    logic [LINE_W-1:0] rd;
    int n0, i0, i1;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);

    // zero page read, then a write promoting a zero block
    rd_check(3, 5);
    checks++;
    if (c_zero != 1) begin failures++; $display("zero read not seen"); end
    wr(3, 5, rnd_line());
    rd_check(3, 5);
    rd_check(3, 4);

    // page PG: blocks 0..2 full (incompressible), block 3 with 11 lines (size code 5)
    for (int l = 0; l < 48; l++) wr(PG, l, rnd_line());
    for (int l = 48; l < 59; l++) wr(PG, l, rnd_line());
    for (int l = 0; l < 64; l += 7) rd_check(PG, l);

    // pressure on the promoted region until PG has been demoted and is read
    // without promotion (8 chunks)
    n0 = c_noprom;
    i0 = 0;
    while (c_noprom == n0 && i0 < 300) begin
      wr(100 + i0, 16 * (i0 % 4), rnd_line());
      rd_check(PG, 48 + (i0 % 11));
      i0++;
    end
    checks++;
    if (c_noprom == n0) begin failures++; $display("page %0d never demoted", PG); end
    $display("  page %0d demoted after %0d other promotions", PG, i0);
    for (int l = 0; l < 64; l += 5) rd_check(PG, l);

    // a write to the compressed block of an 8-chunk page repacks the page with
    // that block stored raw; nothing is promoted and no recompression happens
    n0 = c_prom;
    i0 = int'(n_comp);
    i1 = int'(n_writes);
    wr(PG, 50, rnd_line());
    checks++;
    if (c_prom != n0 || int'(n_comp) != i0) begin
      failures++;
      $display("merge write: promotions %0d compressions %0d", c_prom - n0, int'(n_comp) - i0);
    end
    // the raw block alone is 16 line writes
    if (int'(n_writes) - i1 >= 16) c_merge++;
    for (int l = 48; l < 64; l++) rd_check(PG, l);

    // 16 writes clear the upper half of incompressible block 0 -> recompressed
    n0 = c_wrc;
    for (int n = 0; n < 16; n++) wr(PG, 8 + (n % 8), '0);
    checks++;
    if (c_wrc != n0 + 1) begin failures++; $display("write-count recompression count %0d", c_wrc - n0); end
    // now 7 chunks: block 3 is promoted again
    n0 = c_prom;
    rd_check(PG, 52);
    checks++;
    if (c_prom != n0 + 1) begin failures++; $display("page %0d not promoted after recompression", PG); end
    for (int l = 0; l < 64; l++) rd_check(PG, l);

    // random traffic
    for (int p = 0; p < 24; p++)
      for (int b = 0; b < 4; b++) lim[p * 4 + b] = (((p * 4 + b) * 7) % 5 == 0) ? 16 :
                                                    (((p * 4 + b) * 7) % 5 == 1) ? 1  :
                                                    (((p * 4 + b) * 7) % 5 == 2) ? 6  :
                                                    (((p * 4 + b) * 7) % 5 == 3) ? 11 : 0;
    for (int n = 0; n < 1500; n++) begin
      int unsigned p, b, l, r;
      p = $urandom_range(23);
      b = $urandom_range(3);
      r = $urandom_range(99);
      if (lim[p * 4 + b] == 0 || r < 55) begin
        l = $urandom_range(15);
        rd_check(p, b * 16 + l);
      end else begin
        l = $urandom_range(lim[p * 4 + b] - 1);
        wr(p, b * 16 + l, (r < 60) ? '0 : rnd_line());
      end
    end

    // final sweep over everything written
    foreach (ref_mem[k]) rd_check(k / 64, k % 64);

    $display("mechanisms:");
    expect_count("metadata cache miss", c_miss);
    expect_count("zero block read", c_zero);
    expect_count("promotion", c_prom);
    expect_count("read without promotion", c_noprom);
    expect_count("clean demotion", c_clean);
    expect_count("dirty demotion (repack)", c_dirty);
    expect_count("write-count recompression", c_wrc);
    expect_count("write merged into full page", c_merge);
    checks++;
    if (err_unsupported) begin failures++; $display("err_unsupported raised"); end
    expect_count("lazy reference update", c_touch);
    expect_count("random victim pick", c_rand);
    expect_count("probe skip (cached page)", c_skip);
    expect_count("host stalled by demotion", c_stall);
    expect_count("compressions", int'(n_comp));
    expect_count("decompressions", int'(n_decomp));
    $display("  free P-chunks at end %0d, cursor %0d, memory reads %0d writes %0d",
             p_free, dem_cursor, n_reads, n_writes);
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
