// tb_ibex_top_full: the controller at its full default configuration (96KB
// 16-way metadata cache, 512MB promoted region of 131072 P-chunks, low-water mark
// 256), taken through complete host operations: a read of a never-written page
// (zero block, metadata miss), a write that promotes a zero block into a fresh
// P-chunk, a read-back of that line through the promoted copy, and a read of a
// neighbouring block of the same page that is still zero.  The device memory and
// the block codec are the behavioural models.
module tb_ibex_top_full;
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

  ibex_top dut (.*);

  tb_mem_model u_mem (
    .clk, .rst_n, .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_rdata,
    .n_reads, .n_writes
  );

  tb_codec_model u_cx (
    .clk, .rst_n, .cx_cmd_valid, .cx_cmd_ready, .cx_cmd_comp, .cx_in_valid, .cx_in_ready,
    .cx_in_data, .cx_in_last, .cx_out_valid, .cx_out_ready, .cx_out_data, .cx_out_last,
    .cx_out_status, .cx_out_size, .n_comp, .n_decomp, .last_latency(cx_lat)
  );

  int c_miss = 0, c_zero = 0, c_prom = 0;
  always @(posedge clk) if (rst_n) begin
    c_miss += int'(ev_md_miss);
    c_zero += int'(ev_zero_read);
    c_prom += int'(ev_promote);
  end

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
      $display("no response");
    end
    rd = host_resp_rdata;
  endtask

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [LINE_W-1:0] rd, d;
    for (int i = 0; i < LINE_W / 32; i++) d[32*i +: 32] = $urandom;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);

    check("initial free P-chunks", p_free == 131072);
    host_op(1'b0, 12345, 37, '0, rd);
    check("zero page reads zero", rd == '0);
    check("first access misses the metadata cache", c_miss == 1);
    check("zero read counted", c_zero == 1);
    host_op(1'b1, 12345, 37, d, rd);
    check("write to zero block promotes", c_prom == 1);
    check("one P-chunk taken", p_free == 131071);
    host_op(1'b0, 12345, 37, '0, rd);
    check("read back promoted line", rd == d);
    host_op(1'b0, 12345, 36, '0, rd);
    check("rest of the promoted block is zero", rd == '0);
    host_op(1'b0, 12345, 5, '0, rd);
    check("other block still zero", rd == '0);
    check("metadata stayed cached", c_miss == 1);
    check("no error", !err_unsupported);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
