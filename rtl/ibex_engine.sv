// ibex_engine: request handling, promotion and demotion sequencer.
//
// This is the control part of the compression engine.  It owns one page at a time
// and walks it through these flows, all through one 64B memory port:
//
//  Host request (64B line of a 4KB OS page, block = line[5:4]):
//    1. metadata: metadata-cache lookup; on a miss read the 32B entry from the
//       metadata region and fill it into the cache.  An eviction writes the victim
//       back when dirty and, when the victim page owns a P-chunk, sets that page's
//       reference bit in the activity region (lazy update).
//    2. by block type:
//       zero     read: zeros, no memory access.  write: the block is promoted
//                directly: its 16 lines are written into the page's P-chunk.
//       promoted one access to the P-chunk; a write marks the page dirty.
//       incompr. one access to the raw 1KB slot; a write counts in wr_cntr and the
//                16th write (counter wrap) recompresses the page.
//       compr.   promotion: take a P-chunk if the page has none, read the block's
//                slot, decompress, write the 16 lines into the P-chunk (the host
//                line is answered from the stream; a write replaces it).  The C
//                slots are kept as shadow copies.  A page whose layout fills all
//                eight C-chunks cannot take a P-chunk: reads are decompressed
//                without promotion; a write repacks the page with the written
//                block decompressed, merged and stored raw (no promotion).
//  err_unsupported is raised when a free list is exhausted.
//  Background demotion, when the allocator reports fewer than LOW_WATER free
//  P-chunks (alternating with host requests):
//    scan for a candidate, fetch its metadata (cache probe, else memory, without
//    filling), then
//       clean page: promoted blocks simply become compressed again (shadowed
//                   promotion: no recompression), P-chunk freed.
//       dirty page: repack.
//  Repack: rebuild the page's C-chunk layout block by block.  Promoted blocks (and,
//  after a write-count overflow, incompressible blocks) are streamed through the
//  compressor; compressed blocks are copied as they are, except the target of a
//  write to an eight-chunk page, which goes through the decompressor.  New chunks are popped
//  from the page's sub-region as the layout grows, then the old chunks are pushed
//  back.  The codec reports zero, compressed with size code s, or raw.
//
// Page-level dirty state and the per-block "no slot" marks of zero-origin
// promoted blocks are kept in wr_cntr while the page owns a P-chunk (see ibex_pkg).
// The flows follow the paper; the page-level rules above, the repack procedure and
// all handshakes are this design's own.
module ibex_engine
  import ibex_pkg::*;
#(
  parameter logic [ADDR_W-1:0] MD_BASE        = 41'h0,
  parameter logic [PPTR_W-1:0] P_BASE_PTR     = 29'h000C_0000,
  parameter int unsigned       NUM_SUBREGIONS = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host (CXL side)
  input  logic                 host_req_valid,
  output logic                 host_req_ready,
  input  logic                 host_req_we,
  input  logic [OSPN_W-1:0]    host_req_ospn,
  input  logic [5:0]           host_req_line,
  input  logic [LINE_W-1:0]    host_req_wdata,
  output logic                 host_resp_valid,
  output logic [LINE_W-1:0]    host_resp_rdata,
  // metadata cache
  output logic                 mc_req_valid,
  input  logic                 mc_req_ready,
  output mc_op_e               mc_req_op,
  output logic [OSPN_W-1:0]    mc_req_ospn,
  output md_entry_t            mc_req_data,
  input  logic                 mc_resp_valid,
  input  logic                 mc_resp_hit,
  input  md_entry_t            mc_resp_data,
  input  logic                 mc_evict_valid,
  input  logic [OSPN_W-1:0]    mc_evict_ospn,
  input  md_entry_t            mc_evict_data,
  input  logic                 mc_evict_dirty,
  output logic                 dem_owns_cache,
  // chunk allocator
  output logic                 al_cmd_valid,
  input  logic                 al_cmd_ready,
  output al_op_e               al_cmd_op,
  output logic [SUBR_W-1:0]    al_cmd_sub,
  output logic [PPTR_W-1:0]    al_cmd_ptr,
  input  logic                 al_done,
  input  logic                 al_done_ok,
  input  logic [PPTR_W-1:0]    al_done_ptr,
  input  logic                 p_low,
  // demotion engine
  output logic                 de_cmd_valid,
  input  logic                 de_cmd_ready,
  output de_op_e               de_cmd_op,
  output logic [31:0]          de_cmd_pidx,
  output logic [OSPN_W-1:0]    de_cmd_ospn,
  input  logic                 de_done,
  input  logic                 de_cand_valid,
  input  logic [31:0]          de_cand_pidx,
  input  logic [OSPN_W-1:0]    de_cand_ospn,
  // device memory
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_resp_valid,
  input  logic [LINE_W-1:0]    mem_resp_rdata,
  // block codec
  output logic                 cx_cmd_valid,
  input  logic                 cx_cmd_ready,
  output logic                 cx_cmd_comp,      // 1 compress, 0 decompress
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
  output logic                 err_unsupported,
  output logic                 ev_md_miss,
  output logic                 ev_zero_read,
  output logic                 ev_promote,
  output logic                 ev_no_promote,
  output logic                 ev_demote_clean,
  output logic                 ev_demote_dirty,
  output logic                 ev_wr_recompress,
  output logic                 ev_lazy_touch
);

  typedef enum logic [5:0] {
    ST_IDLE, ST_MC_LOOKUP, ST_MC_LOOKUP_W, ST_MD_RD, ST_MD_RD_W, ST_MC_FILL, ST_MC_FILL_W,
    ST_EV_WB, ST_EV_WB_W, ST_EV_TOUCH, ST_EV_TOUCH_W, ST_DISPATCH,
    ST_DIR, ST_DIR_W, ST_PALLOC, ST_PALLOC_W, ST_DEALLOC, ST_DEALLOC_W,
    ST_ZW, ST_ZW_W, ST_DC_CMD, ST_DC_RD, ST_DC_RD_W, ST_DC_PUSH, ST_DC_POP,
    ST_DC_WR, ST_DC_WR_W, ST_MD_PUT, ST_MC_WRITE_W, ST_MD_WR, ST_MD_WR_W, ST_RESP,
    ST_DEM_SCAN, ST_DEM_SCAN_W, ST_DEM_PROBE, ST_DEM_PROBE_W, ST_DEM_DECIDE,
    ST_RP_BLK, ST_CX_CMD, ST_CX_RD, ST_CX_RD_W, ST_CX_PUSH, ST_CX_POP,
    ST_CP_RD, ST_CP_RD_W, ST_RP_WR, ST_RP_ALLOC, ST_RP_ALLOC_W, ST_RP_WR_W,
    ST_RP_FREE0, ST_RP_FREEC, ST_RP_FREEC_W, ST_FREEP, ST_FREEP_W, ST_DEFREE, ST_DEFREE_W,
    ST_RP_DONE
  } state_e;

  state_e             st_q;
  // request / page under work
  logic               we_q;
  logic [OSPN_W-1:0]  ospn_q;
  logic [3:0]         lidx_q;        // line within the block
  logic [LINE_W-1:0]  wdata_q;
  logic               host_op_q;     // current flow answers the host
  md_entry_t          md_q;          // current (old) entry
  md_entry_t          md_new_q;      // entry being built by a repack
  logic               in_cache_q;
  logic [1:0]         b_q;
  logic [4:0]         k_q;           // input line counter
  logic [4:0]         j_q;           // output line counter
  logic [4:0]         n_q;           // input lines
  logic [LINE_W-1:0]  buf_q;         // one line in flight
  logic [LINE_W-1:0]  resp_q;
  logic               ev_has_p_q;
  logic [OSPN_W-1:0]  ev_ospn_q;
  md_entry_t          ev_data_q;
  // repack
  logic               rp_dem_q;      // repack is a demotion
  logic               rp_incomp_q;   // recompress incompressible blocks
  logic               rp_copy_q;     // current block is copied, not compressed
  logic               rp_merge_q;    // repack merges the host write into block rp_tgt_q
  logic               rp_dc_q;       // current block is decompressed and stored raw
  logic [1:0]         rp_tgt_q;
  logic [5:0]         rp_units_q;    // new layout units before the current block
  logic [3:0]         rp_nch_q;      // new chunks allocated
  logic [SUBR_W-1:0]  rp_sub_q;
  blk_info_t          rp_blk_q;      // new type/size of the current block
  logic [3:0]         rp_free_i_q;
  logic [3:0]         rp_old_nch_q;
  logic [31:0]        cand_pidx_q;
  logic [SUBR_W-1:0]  rr_q;
  logic               dem_turn_q;
  logic               scan_blk_q;
  logic               promo_ok_q;    // decompression writes into the P-chunk
  logic               stale_q;       // demotion candidate no longer owns its P-chunk
  logic [PPTR_W-1:0]  pfree_q;       // P-chunk to release

  // request converter on the current entry
  blk_type_e          rc_type;
  logic [ADDR_W-1:0]  rc_line_addr;
  logic [ADDR_W-1:0]  rc_slot_addr;
  logic [4:0]         rc_fetch;
  logic [3:0]         rc_used_ch;
  logic               rc_can_promote;

  request_converter u_rc (
    .md          (md_q),
    .blk         (b_q),
    .idx         (k_q[3:0]),
    .btype       (rc_type),
    .line_addr   (rc_line_addr),
    .slot_addr   (rc_slot_addr),
    .fetch_lines (rc_fetch),
    .used_chunks (rc_used_ch),
    .can_promote (rc_can_promote)
  );

  logic [ADDR_W-1:0]  md_line_addr;
  logic [5:0]         rp_unit;
  logic [ADDR_W-1:0]  ev_line_addr;

  assign md_line_addr = MD_BASE + ADDR_W'({ospn_q[OSPN_W-1:1], 6'b0});
  assign ev_line_addr = MD_BASE + ADDR_W'({ev_ospn_q[OSPN_W-1:1], 6'b0});
  assign rp_unit      = rp_units_q + 6'(j_q[4:1]);

  // C-chunks held by a page.  While the page owns a P-chunk its layout has at most
  // seven chunks and num_chunks is exact; otherwise the slot sizes give the count
  // (a zero-origin promoted block 3 leaves no trace in the slot sizes).
  function automatic logic [3:0] old_chunks(md_entry_t m);
    return page_has_p(m) ? 4'(m.num_chunks) : units_to_chunks(used_units(m));
  endfunction

  function automatic logic [31:0] pidx_of(md_entry_t m);
    return 32'(m.ptr7 - P_BASE_PTR);
  endfunction

  // ---------------------------------------------------------------- outputs
  assign host_req_ready = (st_q == ST_IDLE) && !(p_low && dem_turn_q && !scan_blk_q);
  assign dem_owns_cache = (st_q == ST_DEM_SCAN_W);

  always_comb begin
    mc_req_valid = 1'b0;
    mc_req_op    = MC_LOOKUP;
    mc_req_ospn  = ospn_q;
    mc_req_data  = md_q;
    unique case (st_q)
      ST_MC_LOOKUP: begin mc_req_valid = 1'b1; mc_req_op = MC_LOOKUP; end
      ST_DEM_PROBE: begin mc_req_valid = 1'b1; mc_req_op = MC_PROBE;  end
      ST_MC_FILL:   begin mc_req_valid = 1'b1; mc_req_op = MC_FILL;   end
      ST_MD_PUT:    begin mc_req_valid = in_cache_q; mc_req_op = MC_WRITE; end
      default: ;
    endcase
  end

  always_comb begin
    al_cmd_valid = 1'b0;
    al_cmd_op    = AL_POP_P;
    al_cmd_sub   = rp_sub_q;
    al_cmd_ptr   = '0;
    unique case (st_q)
      ST_PALLOC:   begin al_cmd_valid = 1'b1; al_cmd_op = AL_POP_P; end
      ST_RP_ALLOC: begin al_cmd_valid = 1'b1; al_cmd_op = AL_POP_C; end
      ST_RP_FREEC: begin
        al_cmd_valid = 1'b1;
        al_cmd_op    = AL_PUSH_C;
        al_cmd_sub   = md_q.sub_region;
        al_cmd_ptr   = (rp_free_i_q == 4'd7) ? PPTR_W'(md_q.ptr7[CPTR_W-1:0])
                                             : PPTR_W'(md_q.ptr[rp_free_i_q[2:0]]);
      end
      ST_FREEP:    begin al_cmd_valid = 1'b1; al_cmd_op = AL_PUSH_P; al_cmd_ptr = pfree_q; end
      default: ;
    endcase
  end

  always_comb begin
    de_cmd_valid = 1'b0;
    de_cmd_op    = DE_SCAN;
    de_cmd_pidx  = cand_pidx_q;
    de_cmd_ospn  = ospn_q;
    unique case (st_q)
      ST_EV_TOUCH: begin de_cmd_valid = 1'b1; de_cmd_op = DE_TOUCH; de_cmd_pidx = pidx_of(ev_data_q); end
      ST_DEALLOC:  begin de_cmd_valid = 1'b1; de_cmd_op = DE_ALLOC; de_cmd_pidx = pidx_of(md_q); end
      ST_DEM_SCAN: begin de_cmd_valid = 1'b1; de_cmd_op = DE_SCAN; end
      ST_DEFREE:   begin de_cmd_valid = 1'b1; de_cmd_op = DE_FREE; end
      default: ;
    endcase
  end

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    mem_req.wstrb = '1;
    unique case (st_q)
      ST_MD_RD: begin mem_req_valid = 1'b1; mem_req.addr = md_line_addr; end
      ST_EV_WB: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = ev_line_addr;
        mem_req.wdata = {ev_data_q, ev_data_q};
        mem_req.wstrb = ev_ospn_q[0] ? {32'hFFFF_FFFF, 32'h0} : {32'h0, 32'hFFFF_FFFF};
      end
      ST_MD_WR: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = md_line_addr;
        mem_req.wdata = {md_q, md_q};
        mem_req.wstrb = ospn_q[0] ? {32'hFFFF_FFFF, 32'h0} : {32'h0, 32'hFFFF_FFFF};
      end
      ST_DIR: begin
        mem_req_valid = 1'b1;
        mem_req.we    = we_q;
        mem_req.addr  = rc_line_addr;
        mem_req.wdata = wdata_q;
      end
      ST_DC_RD, ST_CP_RD: begin mem_req_valid = 1'b1; mem_req.addr = rc_slot_addr; end
      ST_CX_RD: begin
        mem_req_valid = 1'b1;
        mem_req.addr  = (md_q.blk[b_q].btype == BT_PROM) ? pchunk_line_addr(md_q.ptr7, b_q, k_q[3:0])
                                                         : rc_slot_addr;
      end
      ST_DC_WR, ST_ZW: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = pchunk_line_addr(md_q.ptr7, b_q, j_q[3:0]);
        mem_req.wdata = buf_q;
      end
      ST_RP_WR: if (rp_unit[5:2] < rp_nch_q) begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = unit_line_addr(md_new_q, rp_unit, j_q[0]);
        mem_req.wdata = buf_q;
      end
      default: ;
    endcase
  end

  assign cx_cmd_valid = (st_q == ST_DC_CMD) || (st_q == ST_CX_CMD);
  assign cx_cmd_comp  = (st_q == ST_CX_CMD);
  assign cx_in_valid  = (st_q == ST_DC_PUSH) || (st_q == ST_CX_PUSH);
  assign cx_in_data   = buf_q;
  assign cx_in_last   = (k_q + 5'd1 == n_q);
  assign cx_out_ready = (st_q == ST_DC_POP) || (st_q == ST_CX_POP);

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= ST_IDLE;
      we_q <= 1'b0; ospn_q <= '0; lidx_q <= '0; wdata_q <= '0; host_op_q <= 1'b0;
      md_q <= '0; md_new_q <= '0; in_cache_q <= 1'b0;
      b_q <= '0; k_q <= '0; j_q <= '0; n_q <= '0; buf_q <= '0; resp_q <= '0;
      ev_has_p_q <= 1'b0; ev_ospn_q <= '0; ev_data_q <= '0;
      rp_dem_q <= 1'b0; rp_incomp_q <= 1'b0; rp_copy_q <= 1'b0; rp_merge_q <= 1'b0; rp_dc_q <= 1'b0; rp_tgt_q <= '0; rp_units_q <= '0;
      rp_nch_q <= '0; rp_sub_q <= '0; rp_blk_q <= '0; rp_free_i_q <= '0; rp_old_nch_q <= '0;
      cand_pidx_q <= '0; rr_q <= '0; stale_q <= 1'b0; pfree_q <= '0; dem_turn_q <= 1'b0; scan_blk_q <= 1'b0; promo_ok_q <= 1'b0;
      host_resp_valid <= 1'b0; host_resp_rdata <= '0; err_unsupported <= 1'b0;
      ev_md_miss <= 1'b0; ev_zero_read <= 1'b0; ev_promote <= 1'b0; ev_no_promote <= 1'b0;
      ev_demote_clean <= 1'b0; ev_demote_dirty <= 1'b0; ev_wr_recompress <= 1'b0;
      ev_lazy_touch <= 1'b0;
    end else begin
      host_resp_valid  <= 1'b0;
      ev_md_miss       <= 1'b0;
      ev_zero_read     <= 1'b0;
      ev_promote       <= 1'b0;
      ev_no_promote    <= 1'b0;
      ev_demote_clean  <= 1'b0;
      ev_demote_dirty  <= 1'b0;
      ev_wr_recompress <= 1'b0;
      ev_lazy_touch    <= 1'b0;
      unique case (st_q)
        // ------------------------------------------------------------ idle
        ST_IDLE: begin
          if (p_low && !scan_blk_q && (dem_turn_q || !host_req_valid)) begin
            dem_turn_q <= 1'b0;
            host_op_q  <= 1'b0;
            st_q       <= ST_DEM_SCAN;
          end else if (host_req_valid) begin
            dem_turn_q <= 1'b1;
            host_op_q  <= 1'b1;
            we_q       <= host_req_we;
            ospn_q     <= host_req_ospn;
            b_q        <= host_req_line[5:4];
            lidx_q     <= host_req_line[3:0];
            k_q        <= {1'b0, host_req_line[3:0]};
            wdata_q    <= host_req_wdata;
            resp_q     <= '0;
            st_q       <= ST_MC_LOOKUP;
          end
        end
        // ------------------------------------------------------------ metadata
        ST_MC_LOOKUP: if (mc_req_ready) st_q <= ST_MC_LOOKUP_W;
        ST_MC_LOOKUP_W: if (mc_resp_valid) begin
          if (mc_resp_hit) begin
            md_q       <= mc_resp_data;
            in_cache_q <= 1'b1;
            st_q       <= ST_DISPATCH;
          end else begin
            ev_md_miss <= 1'b1;
            st_q       <= ST_MD_RD;
          end
        end
        ST_MD_RD: if (mem_req_ready) st_q <= ST_MD_RD_W;
        ST_MD_RD_W: if (mem_resp_valid) begin
          md_q <= ospn_q[0] ? md_entry_t'(mem_resp_rdata[511:256]) : md_entry_t'(mem_resp_rdata[255:0]);
          if (host_op_q) begin
            in_cache_q <= 1'b1;
            st_q       <= ST_MC_FILL;
          end else begin
            in_cache_q <= 1'b0;
            st_q       <= ST_DEM_DECIDE;
          end
        end
        ST_MC_FILL: if (mc_req_ready) st_q <= ST_MC_FILL_W;
        ST_MC_FILL_W: if (mc_resp_valid) begin
          ev_has_p_q <= mc_evict_valid && page_has_p(mc_evict_data);
          ev_ospn_q  <= mc_evict_ospn;
          ev_data_q  <= mc_evict_data;
          if (mc_evict_valid && mc_evict_dirty)            st_q <= ST_EV_WB;
          else if (mc_evict_valid && page_has_p(mc_evict_data)) st_q <= ST_EV_TOUCH;
          else                                             st_q <= ST_DISPATCH;
        end
        ST_EV_WB: if (mem_req_ready) st_q <= ST_EV_WB_W;
        ST_EV_WB_W: if (mem_resp_valid) st_q <= ev_has_p_q ? ST_EV_TOUCH : ST_DISPATCH;
        ST_EV_TOUCH: if (de_cmd_ready) begin
          ev_lazy_touch <= 1'b1;
          st_q          <= ST_EV_TOUCH_W;
        end
        ST_EV_TOUCH_W: if (de_done) st_q <= ST_DISPATCH;
        // ------------------------------------------------------------ dispatch
        ST_DISPATCH: begin
          unique case (rc_type)
            BT_ZERO: begin
              if (!we_q) begin
                ev_zero_read <= 1'b1;
                resp_q       <= '0;
                st_q         <= ST_RESP;
              end else if (page_has_p(md_q)) begin
                j_q  <= '0;
                buf_q <= (lidx_q == 4'd0) ? wdata_q : '0;
                st_q <= ST_ZW;
              end else if (rc_can_promote) begin
                st_q <= ST_PALLOC;
              end else begin
                err_unsupported <= 1'b1;
                st_q            <= ST_RESP;
              end
            end
            BT_PROM, BT_INCOMP: st_q <= ST_DIR;
            default: begin   // BT_COMP
              k_q <= '0;
              j_q <= '0;
              n_q <= rc_fetch;
              if (page_has_p(md_q)) begin
                promo_ok_q <= 1'b1;
                st_q       <= ST_DC_CMD;
              end else if (rc_can_promote) begin
                st_q <= ST_PALLOC;
              end else if (!we_q) begin
                promo_ok_q <= 1'b0;
                st_q       <= ST_DC_CMD;
              end else begin
                // eight-chunk page: repack it with this block decompressed, the
                // host line merged in, and stored raw (each block needs at most
                // 8 units, so the page still fits in eight chunks)
                rp_dem_q      <= 1'b0;
                rp_incomp_q   <= 1'b0;
                rp_merge_q    <= 1'b1;
                rp_tgt_q      <= b_q;
                promo_ok_q    <= 1'b0;
                b_q           <= '0;
                rp_units_q    <= '0;
                rp_nch_q      <= '0;
                rp_sub_q      <= md_q.sub_region;
                md_new_q      <= md_q;
                md_new_q.ptr  <= '0;
                md_new_q.ptr7 <= '0;
                st_q          <= ST_RP_BLK;
              end
            end
          endcase
        end
        // direct access to a promoted line or a raw incompressible line
        ST_DIR: if (mem_req_ready) st_q <= ST_DIR_W;
        ST_DIR_W: if (mem_resp_valid) begin
          resp_q <= we_q ? '0 : mem_resp_rdata;
          if (we_q && md_q.blk[b_q].btype == BT_PROM) begin
            if (!md_q.wr_cntr[WC_DIRTY]) begin
              md_q.wr_cntr[WC_DIRTY] <= 1'b1;
              st_q <= ST_MD_PUT;
            end else st_q <= ST_RESP;
          end else if (we_q && !page_has_p(md_q)) begin
            // incompressible block written: count, retry compression on overflow
            if (md_q.wr_cntr == 4'(WR_THRESH - 1)) begin
              ev_wr_recompress <= 1'b1;
              rp_dem_q    <= 1'b0;
              rp_incomp_q <= 1'b1;
              st_q        <= ST_RP_BLK;
              b_q         <= '0;
              rp_units_q  <= '0;
              rp_nch_q    <= '0;
              rp_sub_q    <= (used_units(md_q) != 0) ? md_q.sub_region : rr_q;
              md_new_q      <= md_q;
              md_new_q.ptr  <= '0;
              md_new_q.ptr7 <= '0;
            end else begin
              md_q.wr_cntr <= md_q.wr_cntr + 4'd1;
              st_q         <= ST_MD_PUT;
            end
          end else st_q <= ST_RESP;
        end
        // ------------------------------------------------------------ promotion
        ST_PALLOC: if (al_cmd_ready) st_q <= ST_PALLOC_W;
        ST_PALLOC_W: if (al_done) begin
          if (al_done_ok) begin
            md_q.ptr7    <= al_done_ptr;
            md_q.wr_cntr <= '0;
            scan_blk_q   <= 1'b0;
            st_q         <= ST_DEALLOC;
          end else if (!we_q && md_q.blk[b_q].btype == BT_COMP) begin
            promo_ok_q    <= 1'b0;
            st_q          <= ST_DC_CMD;
          end else begin
            err_unsupported <= 1'b1;
            st_q            <= ST_RESP;
          end
        end
        ST_DEALLOC: if (de_cmd_ready) st_q <= ST_DEALLOC_W;
        ST_DEALLOC_W: if (de_done) begin
          j_q <= '0;
          if (md_q.blk[b_q].btype == BT_ZERO) begin
            buf_q <= (lidx_q == 4'd0) ? wdata_q : '0;
            st_q  <= ST_ZW;
          end else begin
            promo_ok_q <= 1'b1;
            st_q       <= ST_DC_CMD;
          end
        end
        // write of a zero block: 16 lines into the P-chunk
        ST_ZW: if (mem_req_ready) st_q <= ST_ZW_W;
        ST_ZW_W: if (mem_resp_valid) begin
          if (j_q == 5'd15) begin
            md_q.blk[b_q] <= '{btype: BT_PROM, bsize: 3'd0};
            md_q.wr_cntr[WC_DIRTY] <= 1'b1;
            if (b_q != 2'd3) md_q.wr_cntr[b_q] <= 1'b1;
            ev_promote <= 1'b1;
            st_q <= ST_MD_PUT;
          end else begin
            j_q   <= j_q + 5'd1;
            buf_q <= (lidx_q == 4'(j_q + 5'd1)) ? wdata_q : '0;
            st_q  <= ST_ZW;
          end
        end
        // decompress a block: slot -> codec -> P-chunk (and the host line)
        ST_DC_CMD: if (cx_cmd_ready) begin
          k_q  <= '0;
          st_q <= ST_DC_RD;
        end
        ST_DC_RD: if (mem_req_ready) st_q <= ST_DC_RD_W;
        ST_DC_RD_W: if (mem_resp_valid) begin
          buf_q <= mem_resp_rdata;
          st_q  <= ST_DC_PUSH;
        end
        ST_DC_PUSH: if (cx_in_ready) begin
          if (k_q + 5'd1 == n_q) begin
            j_q  <= '0;
            st_q <= ST_DC_POP;
          end else begin
            k_q  <= k_q + 5'd1;
            st_q <= ST_DC_RD;
          end
        end
        ST_DC_POP: if (cx_out_valid) begin
          logic [LINE_W-1:0] line;
          line = cx_out_data;
          if (j_q[3:0] == lidx_q) begin
            resp_q <= we_q ? '0 : cx_out_data;
            if (we_q) line = wdata_q;
          end
          buf_q <= line;
          if (rp_dc_q) st_q <= ST_RP_WR;
          else if (promo_ok_q) st_q <= ST_DC_WR;
          else if (j_q == 5'd15) begin
            ev_no_promote <= 1'b1;
            st_q          <= ST_RESP;
          end else j_q <= j_q + 5'd1;
        end
        ST_DC_WR: if (mem_req_ready) st_q <= ST_DC_WR_W;
        ST_DC_WR_W: if (mem_resp_valid) begin
          if (j_q == 5'd15) begin
            md_q.blk[b_q].btype <= BT_PROM;
            if (we_q) md_q.wr_cntr[WC_DIRTY] <= 1'b1;
            ev_promote <= 1'b1;
            st_q       <= ST_MD_PUT;
          end else begin
            j_q  <= j_q + 5'd1;
            st_q <= ST_DC_POP;
          end
        end
        // ------------------------------------------------------------ metadata write
        ST_MD_PUT: begin
          if (in_cache_q) begin
            if (mc_req_ready) st_q <= ST_MC_WRITE_W;
          end else st_q <= ST_MD_WR;
        end
        ST_MC_WRITE_W: if (mc_resp_valid) st_q <= host_op_q ? ST_RESP : ST_IDLE;
        ST_MD_WR: if (mem_req_ready) st_q <= ST_MD_WR_W;
        ST_MD_WR_W: if (mem_resp_valid) st_q <= host_op_q ? ST_RESP : ST_IDLE;
        ST_RESP: begin
          host_resp_valid <= 1'b1;
          host_resp_rdata <= resp_q;
          st_q            <= ST_IDLE;
        end
        // ------------------------------------------------------------ demotion
        ST_DEM_SCAN: if (de_cmd_ready) st_q <= ST_DEM_SCAN_W;
        ST_DEM_SCAN_W: if (de_done) begin
          if (de_cand_valid) begin
            cand_pidx_q <= de_cand_pidx;
            ospn_q      <= de_cand_ospn;
            st_q        <= ST_DEM_PROBE;
          end else begin
            scan_blk_q <= 1'b1;
            st_q       <= ST_IDLE;
          end
        end
        ST_DEM_PROBE: if (mc_req_ready) st_q <= ST_DEM_PROBE_W;
        ST_DEM_PROBE_W: if (mc_resp_valid) begin
          if (mc_resp_hit) begin
            md_q       <= mc_resp_data;
            in_cache_q <= 1'b1;
            st_q       <= ST_DEM_DECIDE;
          end else st_q <= ST_MD_RD;
        end
        ST_DEM_DECIDE: begin
          pfree_q <= md_q.ptr7;
          if (!page_has_p(md_q) || pidx_of(md_q) != cand_pidx_q) begin
            // stale activity entry: release it, leave the page alone
            stale_q <= 1'b1;
            st_q    <= ST_DEFREE;
          end else if (!md_q.wr_cntr[WC_DIRTY]) begin
            // shadowed promotion: the compressed copies are still valid
            ev_demote_clean <= 1'b1;
            stale_q         <= 1'b0;
            for (int i = 0; i < NBLK; i++)
              if (md_q.blk[i].btype == BT_PROM) md_q.blk[i].btype <= BT_COMP;
            md_q.ptr7    <= '0;
            md_q.wr_cntr <= '0;
            st_q         <= ST_FREEP;
          end else begin
            ev_demote_dirty <= 1'b1;
            stale_q       <= 1'b0;
            rp_dem_q      <= 1'b1;
            rp_incomp_q   <= 1'b0;
            b_q           <= '0;
            rp_units_q    <= '0;
            rp_nch_q      <= '0;
            rp_sub_q      <= (used_units(md_q) != 0) ? md_q.sub_region : rr_q;
            md_new_q      <= md_q;
            md_new_q.ptr  <= '0;
            md_new_q.ptr7 <= '0;
            st_q          <= ST_RP_BLK;
          end
        end
        ST_FREEP: if (al_cmd_ready) st_q <= ST_FREEP_W;
        ST_FREEP_W: if (al_done) st_q <= ST_DEFREE;
        ST_DEFREE: if (de_cmd_ready) st_q <= ST_DEFREE_W;
        ST_DEFREE_W: if (de_done) st_q <= stale_q ? ST_IDLE : ST_MD_PUT;
        // ------------------------------------------------------------ repack
        ST_RP_BLK: begin
          k_q     <= '0;
          j_q     <= '0;
          rp_dc_q <= 1'b0;
          unique case (md_q.blk[b_q].btype)
            BT_ZERO: begin
              md_new_q.blk[b_q] <= '{btype: BT_ZERO, bsize: 3'd0};
              if (b_q == 2'd3) st_q <= ST_RP_FREE0;
              else b_q <= b_q + 2'd1;
            end
            BT_PROM: begin
              rp_copy_q <= 1'b0;
              n_q       <= 5'd16;
              st_q      <= ST_CX_CMD;
            end
            BT_INCOMP: begin
              rp_copy_q <= !rp_incomp_q;
              n_q       <= 5'd16;
              rp_blk_q  <= md_q.blk[b_q];
              st_q      <= rp_incomp_q ? ST_CX_CMD : ST_CP_RD;
            end
            default: begin
              n_q <= rc_fetch;
              if (rp_merge_q && b_q == rp_tgt_q) begin
                rp_copy_q <= 1'b0;
                rp_dc_q   <= 1'b1;
                rp_blk_q  <= '{btype: BT_INCOMP, bsize: 3'd7};
                st_q      <= ST_DC_CMD;
              end else begin
                rp_copy_q <= 1'b1;
                rp_blk_q  <= md_q.blk[b_q];
                st_q      <= ST_CP_RD;
              end
            end
          endcase
        end
        // compress a block from its P-chunk lines or raw slot
        ST_CX_CMD: if (cx_cmd_ready) st_q <= ST_CX_RD;
        ST_CX_RD: if (mem_req_ready) st_q <= ST_CX_RD_W;
        ST_CX_RD_W: if (mem_resp_valid) begin
          buf_q <= mem_resp_rdata;
          st_q  <= ST_CX_PUSH;
        end
        ST_CX_PUSH: if (cx_in_ready) begin
          if (k_q == 5'd15) st_q <= ST_CX_POP;
          else begin
            k_q  <= k_q + 5'd1;
            st_q <= ST_CX_RD;
          end
        end
        ST_CX_POP: if (cx_out_valid) begin
          buf_q <= cx_out_data;
          if (j_q == 5'd0) begin
            unique case (cx_out_status)
              CS_ZERO: rp_blk_q <= '{btype: BT_ZERO,   bsize: 3'd0};
              CS_RAW:  rp_blk_q <= '{btype: BT_INCOMP, bsize: 3'd7};
              default: rp_blk_q <= '{btype: BT_COMP,   bsize: cx_out_size};
            endcase
          end
          if (j_q == 5'd0 && cx_out_status == CS_ZERO) begin
            md_new_q.blk[b_q] <= '{btype: BT_ZERO, bsize: 3'd0};
            if (b_q == 2'd3) st_q <= ST_RP_FREE0;
            else begin
              b_q  <= b_q + 2'd1;
              st_q <= ST_RP_BLK;
            end
          end else st_q <= ST_RP_WR;
        end
        // copy a compressed slot line
        ST_CP_RD: if (mem_req_ready) st_q <= ST_CP_RD_W;
        ST_CP_RD_W: if (mem_resp_valid) begin
          buf_q <= mem_resp_rdata;
          j_q   <= k_q;
          st_q  <= ST_RP_WR;
        end
        // write one line of the new layout, growing it by a chunk when needed
        ST_RP_WR: begin
          if (rp_unit[5:2] >= rp_nch_q) st_q <= ST_RP_ALLOC;
          else if (mem_req_ready) st_q <= ST_RP_WR_W;
        end
        ST_RP_ALLOC: if (al_cmd_ready) st_q <= ST_RP_ALLOC_W;
        ST_RP_ALLOC_W: if (al_done) begin
          if (!al_done_ok) err_unsupported <= 1'b1;
          if (rp_nch_q == 4'd7) md_new_q.ptr7 <= PPTR_W'(al_done_ptr[CPTR_W-1:0]);
          else md_new_q.ptr[rp_nch_q[2:0]] <= al_done_ptr[CPTR_W-1:0];
          md_new_q.sub_region <= rp_sub_q;
          rp_nch_q <= rp_nch_q + 4'd1;
          st_q     <= ST_RP_WR;
        end
        ST_RP_WR_W: if (mem_resp_valid) begin
          logic [4:0] nlines;
          nlines = 5'((4'(rp_blk_q.bsize) + 4'd1) << 1);
          if (j_q + 5'd1 == nlines) begin
            // block finished
            md_new_q.blk[b_q] <= rp_blk_q;
            rp_units_q        <= rp_units_q + 6'(rp_blk_q.bsize) + 6'd1;
            if (b_q == 2'd3) st_q <= ST_RP_FREE0;
            else begin
              b_q  <= b_q + 2'd1;
              st_q <= ST_RP_BLK;
            end
          end else begin
            j_q <= j_q + 5'd1;
            if (rp_copy_q) begin
              k_q  <= k_q + 5'd1;
              st_q <= ST_CP_RD;
            end else st_q <= rp_dc_q ? ST_DC_POP : ST_CX_POP;
          end
        end
        // release the old chunks, then the P-chunk of a demoted page
        ST_RP_FREE0: begin
          rp_old_nch_q <= old_chunks(md_q);
          rp_free_i_q  <= '0;
          st_q         <= (old_chunks(md_q) == 4'd0) ? ST_RP_DONE : ST_RP_FREEC;
        end
        ST_RP_FREEC: if (al_cmd_ready) st_q <= ST_RP_FREEC_W;
        ST_RP_FREEC_W: if (al_done) begin
          if (rp_free_i_q + 4'd1 == rp_old_nch_q) st_q <= ST_RP_DONE;
          else begin
            rp_free_i_q <= rp_free_i_q + 4'd1;
            st_q        <= ST_RP_FREEC;
          end
        end
        ST_RP_DONE: begin
          if (used_units(md_q) == 0) rr_q <= (32'(rr_q) + 1 >= NUM_SUBREGIONS) ? '0 : rr_q + 1'b1;
          md_q            <= md_new_q;
          md_q.num_chunks <= 3'(rp_nch_q);          // 8 chunks wrap to 0
          md_q.wr_cntr    <= '0;
          md_q.sub_region <= rp_sub_q;
          rp_merge_q      <= 1'b0;
          rp_dc_q         <= 1'b0;
          st_q            <= rp_dem_q ? ST_FREEP : ST_MD_PUT;
        end
        default: st_q <= ST_IDLE;
      endcase
    end
  end

  // The decompressor returns exactly one 1KB block (16 lines) per command.
  assert property (@(posedge clk) disable iff (!rst_n)
                   st_q == ST_DC_POP && cx_out_valid |-> cx_out_last == (j_q == 5'd15))
    else $error("ibex_engine: codec block length");

  // used_chunks never exceeds the eight pointers of an entry
  assert property (@(posedge clk) disable iff (!rst_n) st_q == ST_DISPATCH |-> rc_used_ch <= 4'd8)
    else $error("ibex_engine: layout larger than 8 chunks");

endmodule
