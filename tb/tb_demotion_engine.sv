// tb_demotion_engine: self-checking test of the second-chance demotion scan.
//
// The engine works on a page activity region of 64 entries (4 lines) held in the
// sparse memory model.  The testbench keeps its own copy of the region and of the
// demotion cursor and answers the metadata-cache probes itself from a set of
// "cached" pages, with the cache's 4-cycle latency.  Random ALLOC / FREE / TOUCH
// commands and SCANs are issued; for every scan the expected candidate is worked
// out here: walk from the cursor, clear referenced bits, skip cached pages, take
// the first allocated, unreferenced, uncached entry; if the line yields none but has
// allocated entries the engine may pick any allocated entry of that line (random
// fallback, flagged by cand_random); an empty line moves the scan on.  After every
// command the whole region in memory is compared with the reference copy.
module tb_demotion_engine;
  import ibex_pkg::*;

  localparam int unsigned NP   = 64;
  localparam logic [ADDR_W-1:0] AB = 41'h0_8000_0000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic              cmd_valid = 1'b0;
  logic              cmd_ready;
  de_op_e            cmd_op = DE_SCAN;
  logic [31:0]       cmd_pidx = '0;
  logic [OSPN_W-1:0] cmd_ospn = '0;
  logic              done, cand_valid, cand_random;
  logic [31:0]       cand_pidx, cursor;
  logic [OSPN_W-1:0] cand_ospn;
  logic              probe_valid, probe_resp_valid, probe_hit;
  logic              probe_ready = 1'b1;
  logic [OSPN_W-1:0] probe_ospn;
  logic              mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t          mem_req;
  logic [LINE_W-1:0] mem_resp_rdata;
  int unsigned       n_reads, n_writes;

  demotion_engine #(.NUM_PCHUNKS(NP), .ACT_BASE(AB)) dut (.*);
  tb_mem_model #(.LATENCY(3)) u_mem (.*);

  // probe responder: 4-cycle answer
  bit          cached [int unsigned];
  logic [3:0]  pv_pipe = '0;
  logic [3:0]  ph_pipe = '0;
  int          n_probes = 0;
  always @(posedge clk) begin
    pv_pipe <= {pv_pipe[2:0], probe_valid && probe_ready};
    ph_pipe <= {ph_pipe[2:0], probe_valid && cached.exists(int'(probe_ospn))};
    if (probe_valid && probe_ready) n_probes++;
  end
  assign probe_resp_valid = pv_pipe[3];
  assign probe_hit        = ph_pipe[3];

  // reference
  act_entry_t  act [NP];
  int unsigned cur;
  int          n_rand = 0, n_found = 0, n_none = 0;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %0t: %s", $time, what);
    end
  endtask

  task automatic issue(input de_op_e op, input int unsigned pidx, input int unsigned ospn);
    int t;
    cmd_valid <= 1'b1;
    cmd_op    <= op;
    cmd_pidx  <= pidx;
    cmd_ospn  <= OSPN_W'(ospn);
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 1'b0;
    t = 0;
    do begin @(posedge clk); t++; end while (!done && t < 5000);
    check("done pulse", done);
  endtask

  task automatic compare_region();
    for (int p = 0; p < NP; p++) begin
      logic [LINE_W-1:0] line;
      act_entry_t e;
      line = u_mem.peek(AB + ADDR_W'(p / 16) * 64);
      e = line[32 * (p % 16) +: 32];
      checks++;
      if (e != act[p]) begin
        failures++;
        $display("FAIL: entry %0d mem %h model %h", p, e, act[p]);
      end
    end
  endtask

  task automatic scan();
    int unsigned L, j, exp_p;
    bit found, rnd_ok;
    found = 0;
    rnd_ok = 0;
    L = cur / 16;
    j = cur % 16;
    for (int n = 0; n < NP / 16 && !found; n++) begin
      bit anya;
      for (int k = j; k < 16 && !found; k++) begin
        int unsigned p;
        p = L * 16 + k;
        if (act[p].allocated) begin
          if (act[p].referenced) act[p].referenced = 1'b0;
          else if (!cached.exists(int'(act[p].ospn))) begin
            found = 1;
            exp_p = p;
          end
        end
      end
      anya = 0;
      for (int k = 0; k < 16; k++) if (act[L * 16 + k].allocated) anya = 1;
      if (!found && anya) begin
        found = 1;
        rnd_ok = 1;
      end
      if (!found && n + 1 < NP / 16) begin   // the last line scanned keeps the cursor
        L = (L + 1) % (NP / 16);
        j = 0;
      end
    end
    issue(DE_SCAN, 0, 0);
    check("cand_valid", cand_valid == found);
    if (found && !rnd_ok) begin
      check($sformatf("candidate %0d exp %0d", cand_pidx, exp_p), cand_pidx == exp_p && !cand_random);
      check("candidate ospn", cand_ospn == act[exp_p].ospn);
      cur = exp_p;
      n_found++;
    end else if (found) begin
      check("random pick flagged", cand_random);
      check("random pick in scanned line", cand_pidx / 16 == L);
      check("random pick is allocated", act[cand_pidx % NP].allocated);
      check("random pick ospn", cand_ospn == act[cand_pidx % NP].ospn);
      cur = cand_pidx;
      n_rand++;
    end else begin
      n_none++;
      cur = L * 16;
    end
    check($sformatf("cursor %0d exp %0d", cursor, cur), cursor == cur);
  endtask

  initial begin
    for (int p = 0; p < NP; p++) act[p] = '0;
    cur = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    scan();                 // empty region: no candidate
    check("empty region gives no candidate", !cand_valid);
    for (int n = 0; n < 1500; n++) begin
      int unsigned r, p, o;
      r = $urandom_range(99);
      p = $urandom_range(NP - 1);
      o = $urandom_range(40);
      if (r < 35) begin
        act[p] = '{allocated: 1'b1, ospn: OSPN_W'(o), referenced: 1'b1};
        issue(DE_ALLOC, p, o);
      end else if (r < 45) begin
        act[p] = '0;
        issue(DE_FREE, p, 0);
      end else if (r < 60) begin
        if (act[p].allocated) act[p].referenced = 1'b1;
        issue(DE_TOUCH, p, 0);
      end else if (r < 70) begin
        if (cached.exists(o)) cached.delete(o); else cached[o] = 1;
      end else begin
        scan();
      end
      compare_region();
    end
    $display("scans: candidate %0d, random %0d, none %0d, probes %0d", n_found, n_rand, n_none, n_probes);
    check("all scan outcomes seen", n_found > 0 && n_rand > 0 && n_none > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
