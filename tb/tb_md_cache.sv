// tb_md_cache: self-checking test of the metadata cache.
//
// A reduced geometry (512B: 4 sets of 4 ways) makes replacement frequent.  A
// reference model keeps, per set, the resident OSPNs in recency order plus each
// entry's data and dirty state.  Random LOOKUP / PROBE / FILL / WRITE operations on
// 24 pages are compared against it: hit, returned data, the evicted entry with its
// dirty flag, and true-LRU victim choice (PROBE must not change recency).  Every
// operation is also checked to answer exactly HIT_LATENCY = 4 cycles after it is
// accepted, and not to accept a new request while busy.
module tb_md_cache;
  import ibex_pkg::*;

  localparam int unsigned WAYS = 4;
  localparam int unsigned SETS = 4;
  localparam int unsigned LAT  = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic              req_valid = 1'b0;
  logic              req_ready;
  mc_op_e            req_op = MC_LOOKUP;
  logic [OSPN_W-1:0] req_ospn = '0;
  md_entry_t         req_data = '0;
  logic              resp_valid, resp_hit, evict_valid, evict_dirty;
  md_entry_t         resp_data, evict_data;
  logic [OSPN_W-1:0] evict_ospn;

  md_cache #(.SIZE_BYTES(SETS * WAYS * 32), .WAYS(WAYS), .HIT_LATENCY(LAT)) dut (.*);

  // reference
  int unsigned order [SETS][$];      // front = most recent
  md_entry_t   rdata [int unsigned];
  bit          rdirty [int unsigned];

  function automatic md_entry_t rnd_entry();
    md_entry_t e;
    for (int i = 0; i < 8; i++) e[32*i +: 32] = $urandom;
    return e;
  endfunction

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %0t: %s", $time, what);
    end
  endtask

  function automatic int find(int unsigned s, int unsigned o);
    foreach (order[s][i]) if (order[s][i] == o) return i;
    return -1;
  endfunction

  task automatic op(input mc_op_e o, input int unsigned ospn, input md_entry_t d);
    int unsigned s, lat;
    int          pos;
    bit          exp_hit, exp_ev, exp_evd;
    int unsigned exp_evo;
    md_entry_t   exp_data, exp_evdata;
    s   = ospn % SETS;
    pos = find(s, ospn);
    exp_hit  = (pos >= 0);
    exp_data = exp_hit ? rdata[ospn] : '0;
    exp_ev   = 1'b0;
    exp_evd  = 1'b0;
    exp_evo  = 0;
    exp_evdata = '0;
    // update reference
    unique case (o)
      MC_LOOKUP: if (exp_hit) begin order[s].delete(pos); order[s].push_front(ospn); end
      MC_PROBE: ;
      MC_WRITE: if (exp_hit) begin
        order[s].delete(pos); order[s].push_front(ospn);
        rdata[ospn] = d; rdirty[ospn] = 1'b1;
      end
      MC_FILL: begin
        if (exp_hit) begin
          order[s].delete(pos);
          rdata[ospn] = d;
        end else begin
          if (order[s].size() == WAYS) begin
            exp_ev     = 1'b1;
            exp_evo    = order[s].pop_back();
            exp_evd    = rdirty[exp_evo];
            exp_evdata = rdata[exp_evo];
          end
          rdata[ospn]  = d;
          rdirty[ospn] = 1'b0;
        end
        order[s].push_front(ospn);
      end
      default: ;
    endcase
    // drive
    req_valid <= 1'b1;
    req_op    <= o;
    req_ospn  <= OSPN_W'(ospn);
    req_data  <= d;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    req_valid <= 1'b0;
    lat = 0;
    do begin
      @(posedge clk);
      lat++;
      if (!resp_valid) check("busy cache must not be ready", !req_ready);
    end while (!resp_valid && lat < 50);
    check($sformatf("latency %0d cycles", lat), lat == LAT);
    check($sformatf("hit op=%s ospn=%0d", o.name(), ospn), resp_hit == exp_hit);
    if (exp_hit) check("data", resp_data == exp_data);
    if (o == MC_FILL) begin
      check($sformatf("evict_valid ospn=%0d", ospn), evict_valid == exp_ev);
      if (exp_ev) begin
        check($sformatf("victim is LRU (exp %0d got %0d)", exp_evo, evict_ospn), evict_ospn == OSPN_W'(exp_evo));
        check("victim dirty flag", evict_dirty == exp_evd);
        check("victim data", evict_data == exp_evdata);
      end
    end
  endtask

  int n_ev;
  always @(posedge clk) if (evict_valid) n_ev++;

  initial begin
    n_ev = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // directed: LRU with and without probes (set 0: ospn 0,4,8,12,16)
    for (int i = 0; i < 4; i++) op(MC_FILL, 4 * i, rnd_entry());
    op(MC_LOOKUP, 0, '0);          // 0 becomes most recent, 4 is LRU
    op(MC_PROBE, 4, '0);           // probe must not save 4
    op(MC_WRITE, 8, rnd_entry());  // 8 dirty
    op(MC_FILL, 16, rnd_entry());  // evicts 4
    op(MC_FILL, 20, rnd_entry());  // evicts 12
    op(MC_FILL, 24, rnd_entry());  // evicts 0
    op(MC_FILL, 28, rnd_entry());  // evicts 8, dirty
    op(MC_WRITE, 4, rnd_entry());  // miss: not resident

    // random
    for (int n = 0; n < 3000; n++) begin
      int unsigned r;
      r = $urandom_range(99);
      op(r < 35 ? MC_LOOKUP : r < 50 ? MC_PROBE : r < 65 ? MC_WRITE : MC_FILL,
         $urandom_range(23), rnd_entry());
    end
    check("evictions happened", n_ev > 100);
    $display("evictions %0d", n_ev);
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
