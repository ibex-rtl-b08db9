// ibex_top: compression controller of a CXL memory expander.
//
// The host sees a flat, larger-than-physical OS physical address space of 4KB
// pages.  Each page is translated by a 32B metadata entry into the device memory,
// where cold data is kept compressed in 1KB blocks packed into 512B C-chunks and
// recently touched blocks are promoted, uncompressed, into a 4KB P-chunk of the
// promoted region.  Promotion keeps the compressed copy as a shadow, so a page that
// was only read is demoted by a metadata update alone.  Cold pages are found by a
// second-chance scan over a page activity region in device memory whose reference
// bits are updated lazily, when a page's metadata leaves the metadata cache.
//
// Blocks: md_cache (translation cache), ibex_engine (request/promotion/demotion
// sequencer, with request_converter for address generation), chunk_allocator
// (P- and per-sub-region C-chunk free lists), demotion_engine (activity-region
// scan) and mem_arbiter (one shared 64B device-memory port).
//
// External parts are brought out as ports: the host side of the CXL controller
// (one 64B request at a time, in-order responses, writes acknowledged), the
// device memory (64B lines, byte strobes, one response per request) and the block
// codec (command, 64B input and output streams; the output carries the zero /
// compressed-size / raw status of a compressed block).
//
// Address map defaults, for a 128GB device: metadata region at 0 (2GB, up to 2^26
// OS pages), page activity region at 2GB, promoted region (512MB) at 3GB, C-chunks
// from 4GB to the end of each 128GB sub-region.  The map is this design's choice.
module ibex_top
  import ibex_pkg::*;
#(
  parameter int unsigned       NUM_SUBREGIONS = 1,
  parameter int unsigned       NUM_PCHUNKS    = 131072,
  parameter int unsigned       LOW_WATER      = 256,
  parameter int unsigned       MC_SIZE_BYTES  = 96 * 1024,
  parameter int unsigned       MC_WAYS        = 16,
  parameter int unsigned       MC_LATENCY     = 4,
  parameter logic [ADDR_W-1:0] MD_BASE        = 41'h0,
  parameter logic [ADDR_W-1:0] ACT_BASE       = 41'h0_8000_0000,
  parameter logic [PPTR_W-1:0] P_BASE_PTR     = 29'h000C_0000,
  parameter logic [CPTR_W-1:0] C_FIRST        = 28'h080_0000,
  parameter int unsigned       C_CHUNKS       = 32'h0780_0000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host requests from the CXL controller
  input  logic                 host_req_valid,
  output logic                 host_req_ready,
  input  logic                 host_req_we,
  input  logic [OSPN_W-1:0]    host_req_ospn,
  input  logic [5:0]           host_req_line,
  input  logic [LINE_W-1:0]    host_req_wdata,
  output logic                 host_resp_valid,
  output logic [LINE_W-1:0]    host_resp_rdata,
  // device memory
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_resp_valid,
  input  logic [LINE_W-1:0]    mem_resp_rdata,
  // block codec
  output logic                 cx_cmd_valid,
  input  logic                 cx_cmd_ready,
  output logic                 cx_cmd_comp,
  output logic                 cx_in_valid,
  input  logic                 cx_in_ready,
  output logic [LINE_W-1:0]    cx_in_data,
  output logic                 cx_in_last,
  input  logic                 cx_out_valid,
  output logic                 cx_out_ready,
  input  logic [LINE_W-1:0]    cx_out_data,
  input  logic                 cx_out_last,
  input  codec_status_e        cx_out_status,
  input  logic [2:0]           cx_out_size,
  // status
  output logic [31:0]          p_free,
  output logic [31:0]          dem_cursor,
  output logic                 err_unsupported,
  output logic                 ev_md_miss,
  output logic                 ev_zero_read,
  output logic                 ev_promote,
  output logic                 ev_no_promote,
  output logic                 ev_demote_clean,
  output logic                 ev_demote_dirty,
  output logic                 ev_wr_recompress,
  output logic                 ev_lazy_touch,
  output logic                 ev_random_pick,
  output logic                 ev_probe_skip
);

  // metadata cache port, shared by the engine and the demotion engine's probes
  logic              mc_req_valid, mc_req_ready, mc_resp_valid, mc_resp_hit;
  mc_op_e            mc_req_op;
  logic [OSPN_W-1:0] mc_req_ospn;
  md_entry_t         mc_req_data, mc_resp_data, mc_evict_data;
  logic              mc_evict_valid, mc_evict_dirty;
  logic [OSPN_W-1:0] mc_evict_ospn;
  logic              e_mc_valid;
  mc_op_e            e_mc_op;
  logic [OSPN_W-1:0] e_mc_ospn;
  md_entry_t         e_mc_data;
  logic              dem_owns_cache;
  logic              d_probe_valid;
  logic [OSPN_W-1:0] d_probe_ospn;

  // allocator
  logic              al_cmd_valid, al_cmd_ready, al_done, al_done_ok, p_low;
  al_op_e            al_cmd_op;
  logic [SUBR_W-1:0] al_cmd_sub;
  logic [PPTR_W-1:0] al_cmd_ptr, al_done_ptr;

  // demotion engine
  logic              de_cmd_valid, de_cmd_ready, de_done, de_cand_valid, de_cand_random;
  de_op_e            de_cmd_op;
  logic [31:0]       de_cmd_pidx, de_cand_pidx;
  logic [OSPN_W-1:0] de_cmd_ospn, de_cand_ospn;

  // memory requesters: 0 allocator, 1 demotion engine, 2 engine
  logic [2:0]        rq_valid, rq_ready, rs_valid;
  mem_req_t [2:0]    rq;
  logic [LINE_W-1:0] rs_rdata;

  assign mc_req_valid = dem_owns_cache ? d_probe_valid : e_mc_valid;
  assign mc_req_op    = dem_owns_cache ? MC_PROBE      : e_mc_op;
  assign mc_req_ospn  = dem_owns_cache ? d_probe_ospn  : e_mc_ospn;
  assign mc_req_data  = e_mc_data;

  md_cache #(
    .SIZE_BYTES (MC_SIZE_BYTES),
    .WAYS       (MC_WAYS),
    .HIT_LATENCY(MC_LATENCY)
  ) u_mc (
    .clk, .rst_n,
    .req_valid  (mc_req_valid),
    .req_ready  (mc_req_ready),
    .req_op     (mc_req_op),
    .req_ospn   (mc_req_ospn),
    .req_data   (mc_req_data),
    .resp_valid (mc_resp_valid),
    .resp_hit   (mc_resp_hit),
    .resp_data  (mc_resp_data),
    .evict_valid(mc_evict_valid),
    .evict_ospn (mc_evict_ospn),
    .evict_data (mc_evict_data),
    .evict_dirty(mc_evict_dirty)
  );

  chunk_allocator #(
    .NUM_SUBREGIONS(NUM_SUBREGIONS),
    .NUM_PCHUNKS   (NUM_PCHUNKS),
    .P_BASE_PTR    (P_BASE_PTR),
    .C_FIRST       (C_FIRST),
    .C_CHUNKS      (C_CHUNKS),
    .LOW_WATER     (LOW_WATER)
  ) u_alloc (
    .clk, .rst_n,
    .cmd_valid     (al_cmd_valid),
    .cmd_ready     (al_cmd_ready),
    .cmd_op        (al_cmd_op),
    .cmd_sub       (al_cmd_sub),
    .cmd_ptr       (al_cmd_ptr),
    .done          (al_done),
    .done_ok       (al_done_ok),
    .done_ptr      (al_done_ptr),
    .p_free        (p_free),
    .p_low         (p_low),
    .mem_req_valid (rq_valid[0]),
    .mem_req_ready (rq_ready[0]),
    .mem_req       (rq[0]),
    .mem_resp_valid(rs_valid[0]),
    .mem_resp_rdata(rs_rdata)
  );

  demotion_engine #(
    .NUM_PCHUNKS(NUM_PCHUNKS),
    .ACT_BASE   (ACT_BASE)
  ) u_dem (
    .clk, .rst_n,
    .cmd_valid       (de_cmd_valid),
    .cmd_ready       (de_cmd_ready),
    .cmd_op          (de_cmd_op),
    .cmd_pidx        (de_cmd_pidx),
    .cmd_ospn        (de_cmd_ospn),
    .done            (de_done),
    .cand_valid      (de_cand_valid),
    .cand_pidx       (de_cand_pidx),
    .cand_ospn       (de_cand_ospn),
    .cand_random     (de_cand_random),
    .cursor          (dem_cursor),
    .probe_valid     (d_probe_valid),
    .probe_ready     (mc_req_ready && dem_owns_cache),
    .probe_ospn      (d_probe_ospn),
    .probe_resp_valid(mc_resp_valid && dem_owns_cache),
    .probe_hit       (mc_resp_hit),
    .mem_req_valid   (rq_valid[1]),
    .mem_req_ready   (rq_ready[1]),
    .mem_req         (rq[1]),
    .mem_resp_valid  (rs_valid[1]),
    .mem_resp_rdata  (rs_rdata)
  );

  ibex_engine #(
    .MD_BASE       (MD_BASE),
    .P_BASE_PTR    (P_BASE_PTR),
    .NUM_SUBREGIONS(NUM_SUBREGIONS)
  ) u_eng (
    .clk, .rst_n,
    .host_req_valid, .host_req_ready, .host_req_we, .host_req_ospn, .host_req_line,
    .host_req_wdata, .host_resp_valid, .host_resp_rdata,
    .mc_req_valid  (e_mc_valid),
    .mc_req_ready  (mc_req_ready && !dem_owns_cache),
    .mc_req_op     (e_mc_op),
    .mc_req_ospn   (e_mc_ospn),
    .mc_req_data   (e_mc_data),
    .mc_resp_valid (mc_resp_valid && !dem_owns_cache),
    .mc_resp_hit   (mc_resp_hit),
    .mc_resp_data  (mc_resp_data),
    .mc_evict_valid(mc_evict_valid),
    .mc_evict_ospn (mc_evict_ospn),
    .mc_evict_data (mc_evict_data),
    .mc_evict_dirty(mc_evict_dirty),
    .dem_owns_cache(dem_owns_cache),
    .al_cmd_valid, .al_cmd_ready, .al_cmd_op, .al_cmd_sub, .al_cmd_ptr,
    .al_done, .al_done_ok, .al_done_ptr, .p_low,
    .de_cmd_valid, .de_cmd_ready, .de_cmd_op, .de_cmd_pidx, .de_cmd_ospn,
    .de_done, .de_cand_valid, .de_cand_pidx, .de_cand_ospn,
    .mem_req_valid (rq_valid[2]),
    .mem_req_ready (rq_ready[2]),
    .mem_req       (rq[2]),
    .mem_resp_valid(rs_valid[2]),
    .mem_resp_rdata(rs_rdata),
    .cx_cmd_valid, .cx_cmd_ready, .cx_cmd_comp, .cx_in_valid, .cx_in_ready, .cx_in_data,
    .cx_in_last, .cx_out_valid, .cx_out_ready, .cx_out_data, .cx_out_last,
    .cx_out_status, .cx_out_size,
    .err_unsupported, .ev_md_miss, .ev_zero_read, .ev_promote, .ev_no_promote,
    .ev_demote_clean, .ev_demote_dirty, .ev_wr_recompress, .ev_lazy_touch
  );

  mem_arbiter #(.N(3)) u_arb (
    .clk, .rst_n,
    .req_valid     (rq_valid),
    .req_ready     (rq_ready),
    .req           (rq),
    .resp_valid    (rs_valid),
    .resp_rdata    (rs_rdata),
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_rdata
  );

  // The metadata region below the activity region covers (ACT_BASE-MD_BASE)/32
  // OS pages; a higher OSPN would alias into the activity region.
  localparam longint unsigned MAX_PAGES = (longint'(ACT_BASE) - longint'(MD_BASE)) / 32;

  assert property (@(posedge clk) disable iff (!rst_n)
                   host_req_valid |-> longint'(host_req_ospn) < MAX_PAGES)
    else $error("ibex_top: OSPN %0d beyond the metadata region", host_req_ospn);

  assign ev_random_pick = de_done && de_cand_valid && de_cand_random;
  assign ev_probe_skip  = mc_resp_valid && dem_owns_cache && mc_resp_hit;

endmodule
