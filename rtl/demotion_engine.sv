// demotion_engine: picks cold promoted pages with a second-chance scan.
//
// The page activity region in device memory holds one 4B entry per P-chunk
// {allocated, OSPN[29:0], referenced}; one 64B read brings 16 entries.  The engine
// keeps the demotion cursor (an entry index) in a register.
//   DE_SCAN  : read the line under the cursor and walk its entries from the cursor.
//              allocated & referenced   -> clear referenced (second chance);
//              allocated & !referenced  -> probe the metadata cache with the OSPN;
//                                          cached pages are hot, skip them, else this
//                                          entry is the candidate.
//              If a fetched line yields no candidate but holds allocated entries, one
//              of them is chosen at random (4-bit LFSR, first allocated entry at or
//              after the random slot) to bound the scan traffic.  A line with no
//              allocated entry moves the scan to the next line.  Modified lines are
//              written back once.  The cursor is left on the candidate.
//   DE_TOUCH : lazy reference update, issued when a page's metadata leaves the
//              metadata cache: read-modify-write setting 'referenced'.
//   DE_ALLOC : write {1, OSPN, 1} when a P-chunk is handed to a page.
//   DE_FREE  : clear the entry when the P-chunk is released.
// Entry layout inside the 32-bit word (allocated at bit 31, referenced at bit 0),
// the referenced=1 value on allocation and the one-scan-ends-at-one-line-with-
// allocated-entries rule are this design's reading of the text.
// Interface: cmd_valid/cmd_ready, done pulse with the candidate on cand_*.
// Probe port: probe_valid/probe_ready, answer on probe_resp_valid/probe_hit.
module demotion_engine
  import ibex_pkg::*;
#(
  parameter int unsigned       NUM_PCHUNKS = 131072,
  parameter logic [ADDR_W-1:0] ACT_BASE    = 41'h0_8000_0000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  de_op_e               cmd_op,
  input  logic [31:0]          cmd_pidx,
  input  logic [OSPN_W-1:0]    cmd_ospn,
  output logic                 done,
  output logic                 cand_valid,
  output logic [31:0]          cand_pidx,
  output logic [OSPN_W-1:0]    cand_ospn,
  output logic                 cand_random,
  output logic [31:0]          cursor,
  output logic                 probe_valid,
  input  logic                 probe_ready,
  output logic [OSPN_W-1:0]    probe_ospn,
  input  logic                 probe_resp_valid,
  input  logic                 probe_hit,
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_resp_valid,
  input  logic [LINE_W-1:0]    mem_resp_rdata
);

  localparam int unsigned NLINES = (NUM_PCHUNKS + 15) / 16;

  typedef enum logic [3:0] {
    S_IDLE, S_RD, S_RD_WAIT, S_EVAL, S_PROBE, S_PROBE_WAIT,
    S_ENDLINE, S_WR, S_WR_WAIT, S_FINISH
  } state_e;

  state_e                 state_q;
  de_op_e                 op_q;
  logic [31:0]            pidx_q;
  logic [OSPN_W-1:0]      ospn_q;
  logic [31:0]            cur_q;       // demotion cursor
  logic [31:0]            line_idx_q;  // line being scanned
  logic [31:0]            nscan_q;     // lines scanned in this DE_SCAN
  act_entry_t [15:0]      line_q;
  logic [4:0]             j_q;
  logic                   mod_q;
  logic                   found_q;
  logic [3:0]             lfsr_q;

  act_entry_t             ent;
  logic                   any_alloc;
  logic [3:0]             rnd_pick;

  assign cmd_ready  = (state_q == S_IDLE);
  assign cursor     = cur_q;
  assign ent        = line_q[j_q[3:0]];
  assign probe_ospn = ent.ospn;
  assign probe_valid = (state_q == S_PROBE);

  always_comb begin
    any_alloc = 1'b0;
    rnd_pick  = '0;
    for (int k = 15; k >= 0; k--) begin
      logic [3:0] s;
      s = lfsr_q + 4'(k);
      if (line_q[s].allocated) begin
        any_alloc = 1'b1;
        rnd_pick  = s;
      end
    end
  end

  // Memory requests: line reads for scan/touch, full-line write-back after a scan
  // or touch, single-entry writes for alloc/free.
  always_comb begin
    mem_req_valid = (state_q == S_RD) || (state_q == S_WR);
    mem_req       = '0;
    mem_req.addr  = ACT_BASE + ADDR_W'({line_idx_q, 6'b0});
    if (state_q == S_WR) begin
      mem_req.we = 1'b1;
      if (op_q == DE_ALLOC || op_q == DE_FREE) begin
        mem_req.wdata = LINE_W'(op_q == DE_ALLOC ? {1'b1, ospn_q, 1'b1} : 32'b0) << (32 * pidx_q[3:0]);
        mem_req.wstrb = STRB_W'(4'hF) << (4 * pidx_q[3:0]);
      end else begin
        mem_req.wdata = line_q;
        mem_req.wstrb = '1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      op_q        <= DE_SCAN;
      pidx_q      <= '0;
      ospn_q      <= '0;
      cur_q       <= '0;
      line_idx_q  <= '0;
      nscan_q     <= '0;
      line_q      <= '0;
      j_q         <= '0;
      mod_q       <= 1'b0;
      found_q     <= 1'b0;
      lfsr_q      <= 4'b1001;
      done        <= 1'b0;
      cand_valid  <= 1'b0;
      cand_pidx   <= '0;
      cand_ospn   <= '0;
      cand_random <= 1'b0;
    end else begin
      done   <= 1'b0;
      lfsr_q <= {lfsr_q[2:0], lfsr_q[3] ^ lfsr_q[2]};
      unique case (state_q)
        S_IDLE: if (cmd_valid) begin
          op_q    <= cmd_op;
          pidx_q  <= cmd_pidx;
          ospn_q  <= cmd_ospn;
          nscan_q <= '0;
          found_q <= 1'b0;
          mod_q   <= 1'b0;
          if (cmd_op == DE_SCAN) begin
            line_idx_q  <= cur_q >> 4;
            j_q         <= {1'b0, cur_q[3:0]};
            cand_valid  <= 1'b0;
            cand_random <= 1'b0;
            state_q     <= S_RD;
          end else begin
            line_idx_q <= cmd_pidx >> 4;
            state_q    <= (cmd_op == DE_TOUCH) ? S_RD : S_WR;
          end
        end
        S_RD: if (mem_req_ready) state_q <= S_RD_WAIT;
        S_RD_WAIT: if (mem_resp_valid) begin
          line_q <= mem_resp_rdata;
          if (op_q == DE_TOUCH) begin
            // set 'referenced' of an allocated entry, nothing otherwise
            if (mem_resp_rdata[32 * pidx_q[3:0] + 31]) begin   // allocated bit
              line_q[pidx_q[3:0]].referenced <= 1'b1;
              state_q <= S_WR;
            end else begin
              state_q <= S_FINISH;
            end
          end else begin
            state_q <= S_EVAL;
          end
        end
        S_EVAL: begin
          if (j_q == 5'd16) state_q <= S_ENDLINE;
          else if (!ent.allocated) j_q <= j_q + 1'b1;
          else if (ent.referenced) begin
            line_q[j_q[3:0]].referenced <= 1'b0;
            mod_q <= 1'b1;
            j_q   <= j_q + 1'b1;
          end else state_q <= S_PROBE;
        end
        S_PROBE: if (probe_ready) state_q <= S_PROBE_WAIT;
        S_PROBE_WAIT: if (probe_resp_valid) begin
          if (probe_hit) begin
            j_q     <= j_q + 1'b1;
            state_q <= S_EVAL;
          end else begin
            found_q    <= 1'b1;
            cand_valid <= 1'b1;
            cand_pidx  <= {line_idx_q[27:0], j_q[3:0]};
            cand_ospn  <= ent.ospn;
            cur_q      <= {line_idx_q[27:0], j_q[3:0]};
            state_q    <= S_ENDLINE;
          end
        end
        S_ENDLINE: begin
          // candidate found, or random fallback, or move to the next line
          if (!found_q && any_alloc) begin
            found_q     <= 1'b1;
            cand_valid  <= 1'b1;
            cand_random <= 1'b1;
            cand_pidx   <= {line_idx_q[27:0], rnd_pick};
            cand_ospn   <= line_q[rnd_pick].ospn;
            cur_q       <= {line_idx_q[27:0], rnd_pick};
          end
          if (mod_q) state_q <= S_WR;
          else if (found_q || any_alloc || nscan_q + 1 >= NLINES) state_q <= S_FINISH;
          else begin
            nscan_q    <= nscan_q + 1;
            line_idx_q <= (line_idx_q + 1 >= NLINES) ? '0 : line_idx_q + 1;
            cur_q      <= ((line_idx_q + 1 >= NLINES) ? '0 : line_idx_q + 1) << 4;
            j_q        <= '0;
            state_q    <= S_RD;
          end
        end
        S_WR: if (mem_req_ready) state_q <= S_WR_WAIT;
        S_WR_WAIT: if (mem_resp_valid) begin
          mod_q   <= 1'b0;
          state_q <= (op_q == DE_SCAN) ? S_ENDLINE : S_FINISH;
        end
        S_FINISH: begin
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A probe is only raised for an allocated, unreferenced entry.
  assert property (@(posedge clk) disable iff (!rst_n) probe_valid |-> ent.allocated && !ent.referenced)
    else $error("demotion_engine: bad probe");

endmodule
