// md_cache: set-associative, write-back, true-LRU cache of 32B metadata entries.
//
// It keeps recently used translation entries on chip so that most requests skip
// the metadata region of device memory.  The default geometry is the evaluated
// one: 96KB of 32B entries, 16 ways, hence 192 sets, 4-cycle access.  The set
// index is OSPN mod SETS and the full OSPN is kept as tag (this design's choice;
// with 192 sets the index is not a bit slice).
//
// One operation at a time: req_valid/req_ready hand-shake, then resp_valid pulses
// exactly HIT_LATENCY cycles after acceptance: a request presented in cycle c is
// answered in cycle c+HIT_LATENCY (the tag/data arrays are read in the cycle
// before the answer is registered).  HIT_LATENCY must be at least 2.
//   MC_LOOKUP  read; on a hit the line becomes most recently used.
//   MC_PROBE   read without touching LRU state; used by the demotion engine to
//              check whether a page that looks cold is in fact still cached.
//   MC_FILL    insert a clean entry.  If the set is full the least recently used
//              entry is evicted and reported on evict_* together with resp_valid;
//              the caller writes it back when dirty and uses the eviction as the
//              moment to set the page's reference bit (lazy update).
//   MC_WRITE   overwrite a resident entry and mark it dirty (resp_hit=0 if absent).
// LRU state is a per-way age (0 = most recent); the ages of a set are always a
// permutation of 0..WAYS-1, so the victim is the invalid way or the age WAYS-1 way.
module md_cache
  import ibex_pkg::*;
#(
  parameter int unsigned SIZE_BYTES  = 96 * 1024,
  parameter int unsigned WAYS        = 16,
  parameter int unsigned ENTRY_BYTES = 32,
  parameter int unsigned HIT_LATENCY = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  mc_op_e            req_op,
  input  logic [OSPN_W-1:0] req_ospn,
  input  md_entry_t         req_data,
  output logic              resp_valid,
  output logic              resp_hit,
  output md_entry_t         resp_data,
  output logic              evict_valid,
  output logic [OSPN_W-1:0] evict_ospn,
  output md_entry_t         evict_data,
  output logic              evict_dirty
);

  localparam int unsigned SETS  = SIZE_BYTES / ENTRY_BYTES / WAYS;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned CNT_W = $clog2(HIT_LATENCY + 1);

  md_entry_t         data_q  [SETS][WAYS];
  logic [OSPN_W-1:0] tag_q   [SETS][WAYS];
  logic [WAY_W-1:0]  age_q   [SETS][WAYS];
  logic              valid_q [SETS][WAYS];
  logic              dirty_q [SETS][WAYS];

  logic              busy_q;
  logic [CNT_W-1:0]  cnt_q;
  mc_op_e            op_q;
  logic [OSPN_W-1:0] ospn_q;
  md_entry_t         wdata_q;
  logic [SET_W-1:0]  set_q;

  logic              hit;
  logic [WAY_W-1:0]  hit_way;
  logic [WAY_W-1:0]  victim;
  logic              have_inv;
  logic              act;

  assign req_ready = !busy_q;
  assign act       = busy_q && (cnt_q == CNT_W'(HIT_LATENCY - 2));

  always_comb begin
    hit      = 1'b0;
    hit_way  = '0;
    have_inv = 1'b0;
    victim   = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (valid_q[set_q][w] && tag_q[set_q][w] == ospn_q && !hit) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (!valid_q[set_q][w] && !have_inv) begin
        have_inv = 1'b1;
        victim   = WAY_W'(w);
      end
    end
    if (!have_inv)
      for (int unsigned w = 0; w < WAYS; w++)
        if (age_q[set_q][w] == WAY_W'(WAYS - 1)) victim = WAY_W'(w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q      <= 1'b0;
      cnt_q       <= '0;
      op_q        <= MC_LOOKUP;
      ospn_q      <= '0;
      wdata_q     <= '0;
      set_q       <= '0;
      resp_valid  <= 1'b0;
      resp_hit    <= 1'b0;
      resp_data   <= '0;
      evict_valid <= 1'b0;
      evict_ospn  <= '0;
      evict_data  <= '0;
      evict_dirty <= 1'b0;
      for (int unsigned s = 0; s < SETS; s++)
        for (int unsigned w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          dirty_q[s][w] <= 1'b0;
          age_q[s][w]   <= WAY_W'(w);
        end
    end else begin
      resp_valid  <= 1'b0;
      evict_valid <= 1'b0;
      if (req_valid && req_ready) begin
        busy_q  <= 1'b1;
        cnt_q   <= '0;
        op_q    <= req_op;
        ospn_q  <= req_ospn;
        wdata_q <= req_data;
        set_q   <= SET_W'(req_ospn % OSPN_W'(SETS));
      end else if (busy_q && !act) begin
        cnt_q <= cnt_q + 1'b1;
      end else if (act) begin
        logic [WAY_W-1:0] tw;   // way made most recent
        logic             touch;
        busy_q     <= 1'b0;
        resp_valid <= 1'b1;
        resp_hit   <= hit;
        resp_data  <= hit ? data_q[set_q][hit_way] : '0;
        tw    = hit_way;
        touch = 1'b0;
        unique case (op_q)
          MC_LOOKUP: touch = hit;
          MC_PROBE:  touch = 1'b0;
          MC_WRITE: begin
            if (hit) begin
              data_q[set_q][hit_way]  <= wdata_q;
              dirty_q[set_q][hit_way] <= 1'b1;
              touch = 1'b1;
            end
          end
          MC_FILL: begin
            touch = 1'b1;
            if (hit) begin
              data_q[set_q][hit_way] <= wdata_q;
            end else begin
              tw = victim;
              evict_valid <= valid_q[set_q][victim];
              evict_ospn  <= tag_q[set_q][victim];
              evict_data  <= data_q[set_q][victim];
              evict_dirty <= dirty_q[set_q][victim];
              valid_q[set_q][victim] <= 1'b1;
              dirty_q[set_q][victim] <= 1'b0;
              tag_q[set_q][victim]   <= ospn_q;
              data_q[set_q][victim]  <= wdata_q;
            end
          end
          default: ;
        endcase
        if (touch)
          for (int unsigned w = 0; w < WAYS; w++) begin
            if (WAY_W'(w) == tw)                       age_q[set_q][w] <= '0;
            else if (age_q[set_q][w] < age_q[set_q][tw]) age_q[set_q][w] <= age_q[set_q][w] + 1'b1;
          end
      end
    end
  end

  initial assert (HIT_LATENCY >= 2) else $fatal(1, "md_cache: HIT_LATENCY below 2");

  // The age vector of a set must stay a permutation: exactly one way is oldest.
  int unsigned n_oldest;
  always_comb begin
    n_oldest = 0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (age_q[set_q][w] == WAY_W'(WAYS - 1)) n_oldest++;
  end

  assert property (@(posedge clk) disable iff (!rst_n) act |-> n_oldest == 1)
    else $error("md_cache: LRU ages of set %0d corrupt", set_q);

endmodule
