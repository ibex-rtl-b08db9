// tb_ibex_workloads: the ten evaluated workloads as synthetic access streams.
//
// Each workload gets its own controller instance, device-memory model and codec
// model, all running in parallel.  A workload is described by three numbers:
//   * its share of writes, WPKI / (RPKI + WPKI), from the published read and
//     write intensities (bwaves 13.4/2.1, mcf 55.0/9.6, parest 14.5/0.2,
//     lbm 23.9/17.8, omnetpp 8.8/4.1, bfs 41.9/2.7, pr 126.8/2.3, cc 33.3/3.8,
//     tc 16.7/11.6, XSBench 37.7/0.0 reads/writes per kilo-instruction);
//   * whether its working set fits the promoted region.  bwaves, parest and
//     lbm are reported to run without demotion, so they touch fewer pages
//     than the region holds; the others touch more;
//   * a skew: 70% of accesses go to a quarter of the pages.
// The promoted region is scaled to 272 P-chunks with the low-water mark at
// 256, so 16 pages stay promoted.  A "fitting" workload touches 12 pages and a
// "spilling" one 40.
//
// Every workload first writes its pages (blocks that are zero, compressible at
// various sizes, or incompressible), then issues OPS requests with its
// read/write mix.  Every read is checked against a reference copy.  Then:
//   * fitting workloads must cause no demotion at all;
//   * spilling workloads must demote;
//   * the read-only workload (XSBench) must recompress each page at most once
//     (its first demotion, after the initial writes); every later demotion of
//     it must be clean.
// Memory lines moved per request are printed per workload.
module tb_ibex_workloads;
  import ibex_pkg::*;

  localparam int NWL  = 10;
  localparam int OPS  = 400;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_done = 0;

  function automatic string wl_name(int i);
    case (i)
      0: return "bwaves";  1: return "mcf";  2: return "parest";  3: return "lbm";
      4: return "omnetpp"; 5: return "bfs";  6: return "pr";      7: return "cc";
      8: return "tc";      default: return "XSBench";
    endcase
  endfunction

  // writes per mille of requests, rounded from WPKI / (RPKI + WPKI)
  function automatic int wl_wr_permille(int i);
    case (i)
      0: return 135;  1: return 149;  2: return 14;   3: return 427;  4: return 318;
      5: return 61;   6: return 18;   7: return 102;  8: return 410;  default: return 0;
    endcase
  endfunction

  function automatic bit wl_fits(int i);
    return (i == 0 || i == 2 || i == 3);
  endfunction

  initial begin
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
  end

  for (genvar W = 0; W < NWL; W++) begin : g_wl
    localparam int FOOT = wl_fits(W) ? 12 : 40;

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
      .NUM_PCHUNKS  (272),
      .LOW_WATER    (256),
      .MC_SIZE_BYTES(1024),
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

    int c_prom = 0, c_clean = 0, c_dirty = 0;
    always @(posedge clk) if (rst_n) begin
      c_prom  += int'(ev_promote);
      c_clean += int'(ev_demote_clean);
      c_dirty += int'(ev_demote_dirty);
    end

    logic [LINE_W-1:0] ref_mem [int unsigned];
    int unsigned       lim [int unsigned];   // written lines per (page, block)

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
        $display("%s: no response ospn=%0d line=%0d", wl_name(W), ospn, line);
      end
      rd = host_resp_rdata;
    endtask

    task automatic wr(input int unsigned ospn, input int unsigned line);
      logic [LINE_W-1:0] d, rd;
      for (int i = 0; i < LINE_W / 32; i++) d[32*i +: 32] = $urandom;
      d[0] = 1'b1;
      host_op(1'b1, ospn, line, d, rd);
      ref_mem[ospn * 64 + line] = d;
    endtask

    task automatic rd_check(input int unsigned ospn, input int unsigned line);
      logic [LINE_W-1:0] rd, exp;
      int unsigned k;
      k = ospn * 64 + line;
      exp = ref_mem.exists(k) ? ref_mem[k] : '0;
      host_op(1'b0, ospn, line, '0, rd);
      checks++;
      if (rd !== exp) begin
        failures++;
        $display("%s: data mismatch ospn=%0d line=%0d", wl_name(W), ospn, line);
      end
    endtask

    initial begin
      int prom0, clean0, dirty0, rd0, wr0;
      wait (rst_n);
      repeat (5) @(posedge clk);
      // initial contents: per block zero, 1, 3 or 5 lines (compressible) or, in
      // every fourth page, one full incompressible block
      for (int p = 0; p < FOOT; p++)
        for (int b = 0; b < 4; b++) begin
          int unsigned n;
          n = (p % 4 == 3 && b == p % 4) ? 16 : ((p + b) % 4 == 0) ? 0 : 2 * ((p + b) % 4) - 1;
          lim[p * 4 + b] = n;
          for (int l = 0; l < int'(n); l++) wr(p, b * 16 + l);
        end
      prom0  = c_prom;
      clean0 = c_clean;
      dirty0 = c_dirty;
      rd0    = int'(n_reads);
      wr0    = int'(n_writes);
      for (int n = 0; n < OPS; n++) begin
        int unsigned p, b, l;
        p = ($urandom_range(99) < 70) ? $urandom_range(FOOT / 4 - 1) : $urandom_range(FOOT - 1);
        b = $urandom_range(3);
        if (int'($urandom_range(999)) < wl_wr_permille(W)) begin
          // stay inside the block's written lines so pages never outgrow seven chunks
          l = (lim[p * 4 + b] == 0) ? 0 : $urandom_range(lim[p * 4 + b] - 1);
          if (lim[p * 4 + b] == 0) lim[p * 4 + b] = 1;
          wr(p, b * 16 + l);
        end else begin
          rd_check(p, b * 16 + $urandom_range(15));
        end
      end
      for (int p = 0; p < FOOT; p++)
        for (int l = 0; l < 64; l += 3) rd_check(p, l);

      $display("%-8s pages %2d  writes %3d/1000  promotions %4d  demotions clean %4d dirty %4d  lines per request %5.2f",
               wl_name(W), FOOT, wl_wr_permille(W), c_prom - prom0, c_clean - clean0, c_dirty - dirty0,
               real'(int'(n_reads) + int'(n_writes) - rd0 - wr0) / real'(OPS));
      checks++;
      if (err_unsupported) begin
        failures++;
        $display("%s: free list exhausted", wl_name(W));
      end
      checks++;
      if (wl_fits(W) && (c_clean + c_dirty) != 0) begin
        failures++;
        $display("%s: fits the promoted region but demoted %0d pages", wl_name(W), c_clean + c_dirty);
      end
      if (!wl_fits(W) && (c_clean + c_dirty - clean0 - dirty0) == 0) begin
        failures++;
        $display("%s: spills the promoted region but never demoted", wl_name(W));
      end
      if (wl_wr_permille(W) == 0) begin
        checks++;
        if (c_dirty - dirty0 > FOOT || c_clean - clean0 == 0) begin
          failures++;
          $display("%s: read-only phase demotions clean %0d dirty %0d", wl_name(W),
                   c_clean - clean0, c_dirty - dirty0);
        end
      end
      n_done++;
    end
  end

  initial begin
    wait (n_done == NWL);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
