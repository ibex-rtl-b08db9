// tb_chunk_allocator: self-checking test of the P-chunk / C-chunk free lists.
//
// The allocator runs against the sparse memory model with two C sub-regions, a
// promoted region of 300 P-chunks (low-water mark 256) and 40 C-chunks per
// sub-region.  A reference model keeps each list as a LIFO of pushed pointers
// in front of an untouched frontier, so it predicts every pop: the most recently
// freed chunk, else the next never-used chunk, else exhaustion (done_ok = 0).
// Random pops and pushes of previously handed-out chunks are compared for the
// returned pointer, the free P-chunk count and the low-water flag; no chunk may be
// handed out twice.  The lists are also drained completely to check exhaustion.
module tb_chunk_allocator;
  import ibex_pkg::*;

  localparam int unsigned NP = 300;
  localparam int unsigned NC = 40;
  localparam logic [28:0] PB = 29'h000C_0000;
  localparam logic [27:0] CF = 28'h080_0000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic              cmd_valid = 1'b0;
  logic              cmd_ready;
  al_op_e            cmd_op = AL_POP_P;
  logic [SUBR_W-1:0] cmd_sub = '0;
  logic [PPTR_W-1:0] cmd_ptr = '0;
  logic              done, done_ok;
  logic [PPTR_W-1:0] done_ptr;
  logic [31:0]       p_free;
  logic              p_low;
  logic              mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t          mem_req;
  logic [LINE_W-1:0] mem_resp_rdata;
  int unsigned       n_reads, n_writes;

  chunk_allocator #(
    .NUM_SUBREGIONS(2), .NUM_PCHUNKS(NP), .P_BASE_PTR(PB), .C_FIRST(CF), .C_CHUNKS(NC), .LOW_WATER(256)
  ) dut (.*);

  tb_mem_model #(.LATENCY(3)) u_mem (.*);

  // reference: list 0 = P, 1..2 = C sub-regions 0..1
  int unsigned stack [3][$];
  int unsigned front [3];
  int unsigned held  [3][$];   // handed out, not yet freed
  bit          busy  [3][int unsigned];
  int unsigned exp_free;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %0t: %s", $time, what);
    end
  endtask

  task automatic issue(input al_op_e op, input int unsigned sub, input int unsigned ptr,
                       output logic ok, output int unsigned got);
    int t;
    cmd_valid <= 1'b1;
    cmd_op    <= op;
    cmd_sub   <= SUBR_W'(sub);
    cmd_ptr   <= PPTR_W'(ptr);
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 1'b0;
    t = 0;
    do begin @(posedge clk); t++; end while (!done && t < 100);
    check("done pulse", done);
    ok  = done_ok;
    got = done_ptr;
  endtask

  task automatic pop(input int l);
    logic ok;
    int unsigned got, e;
    bit exp_ok;
    int unsigned lim, base;
    lim  = (l == 0) ? NP : NC;
    base = (l == 0) ? PB : CF;
    exp_ok = 1;
    if (stack[l].size() > 0) e = stack[l].pop_back();
    else if (front[l] < lim) begin e = base + front[l]; front[l]++; end
    else exp_ok = 0;
    issue(l == 0 ? AL_POP_P : AL_POP_C, l == 0 ? 0 : l - 1, 0, ok, got);
    check($sformatf("pop list %0d ok", l), ok == exp_ok);
    if (exp_ok) begin
      check($sformatf("pop list %0d: got %h exp %h", l, got, e), got == e);
      check("no double allocation", !busy[l].exists(got));
      busy[l][got] = 1;
      held[l].push_back(got);
      if (l == 0) exp_free--;
    end
    check($sformatf("p_free %0d exp %0d", p_free, exp_free), p_free == exp_free);
    check("p_low", p_low == (exp_free < 256));
  endtask

  task automatic push(input int l);
    logic ok;
    int unsigned got, k, p;
    if (held[l].size() == 0) return;
    k = $urandom_range(held[l].size() - 1);
    p = held[l][k];
    held[l].delete(k);
    busy[l].delete(p);
    stack[l].push_back(p);
    if (l == 0) exp_free++;
    issue(l == 0 ? AL_PUSH_P : AL_PUSH_C, l == 0 ? 0 : l - 1, p, ok, got);
    check("push ok", ok);
    check($sformatf("p_free %0d exp %0d", p_free, exp_free), p_free == exp_free);
    check("p_low", p_low == (exp_free < 256));
  endtask

  initial begin
    exp_free = NP;
    for (int l = 0; l < 3; l++) front[l] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    check("reset free count", p_free == NP && !p_low);
    for (int n = 0; n < 2000; n++) begin
      int l;
      l = $urandom_range(2);
      if ($urandom_range(99) < 55) pop(l); else push(l);
    end
    // drain every list to exhaustion
    for (int l = 0; l < 3; l++) repeat ((l == 0 ? NP : NC) + 2) pop(l);
    check("P list exhausted", p_free == 0 && p_low);
    $display("memory reads %0d writes %0d", n_reads, n_writes);
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
