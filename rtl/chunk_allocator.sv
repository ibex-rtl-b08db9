// chunk_allocator: free-list management of 4KB P-chunks and 512B C-chunks.
//
// Free chunks are chained in device memory: the first 8 bytes of a free chunk hold
// the pointer to the next free chunk, and only the head pointer of each list lives
// in a device register.  There is one list for the promoted region (29-bit P-chunk
// pointers) and one per compressed sub-region (28-bit C-chunk pointers), so all
// C-chunks of a page come from one sub-region and share its 4 MSBs.
//   pop  : take the head, read its 'next' field from memory, make it the new head.
//   push : write the old head into the freed chunk, make the freed chunk the head.
// Chunks that have never been handed out are not chained at boot; each list also
// has a frontier counter and a pop from an empty chain takes the next unused chunk
// (this avoids a boot-time sweep of the whole region and is this design's choice).
// p_low is raised while fewer than LOW_WATER P-chunks are free; it starts
// background demotion.
//
// Interface: cmd_valid/cmd_ready; done pulses once per command with done_ok=0 when
// a pop finds the list exhausted.  One 64B memory request at a time, each answered
// by one mem_resp_valid (writes are acknowledged too).
module chunk_allocator
  import ibex_pkg::*;
#(
  parameter int unsigned  NUM_SUBREGIONS = 1,
  parameter int unsigned  NUM_PCHUNKS    = 131072,        // 512MB promoted region
  parameter logic [28:0]  P_BASE_PTR     = 29'h000C_0000, // promoted region at 3GB
  parameter logic [27:0]  C_FIRST        = 28'h080_0000,  // C-chunks start 4GB into a sub-region
  parameter int unsigned  C_CHUNKS       = 32'h0780_0000, // up to 128GB
  parameter int unsigned  LOW_WATER      = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  al_op_e                   cmd_op,
  input  logic [SUBR_W-1:0]        cmd_sub,
  input  logic [PPTR_W-1:0]        cmd_ptr,
  output logic                     done,
  output logic                     done_ok,
  output logic [PPTR_W-1:0]        done_ptr,
  output logic [31:0]              p_free,
  output logic                     p_low,
  output logic                     mem_req_valid,
  input  logic                     mem_req_ready,
  output mem_req_t                 mem_req,
  input  logic                     mem_resp_valid,
  input  logic [LINE_W-1:0]        mem_resp_rdata
);

  localparam logic [PPTR_W-1:0] P_NIL = '1;
  localparam logic [CPTR_W-1:0] C_NIL = '1;
  localparam int unsigned       SI_W  = (NUM_SUBREGIONS > 1) ? $clog2(NUM_SUBREGIONS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} state_e;

  state_e               state_q;
  al_op_e               op_q;
  logic [SI_W-1:0]      sub_q;
  logic [SUBR_W-1:0]    subr_q;
  logic [PPTR_W-1:0]    ptr_q;

  logic [PPTR_W-1:0]    p_head_q;
  logic [31:0]          p_front_q;
  logic [31:0]          p_free_q;
  logic [CPTR_W-1:0]    c_head_q  [NUM_SUBREGIONS];
  logic [31:0]          c_front_q [NUM_SUBREGIONS];

  assign cmd_ready = (state_q == S_IDLE);
  assign p_free    = p_free_q;
  assign p_low     = (p_free_q < LOW_WATER);

  always_comb begin
    mem_req_valid = (state_q == S_REQ);
    mem_req       = '0;
    if (op_q == AL_POP_P || op_q == AL_PUSH_P) mem_req.addr = {ptr_q, 12'b0};
    else                                       mem_req.addr = {subr_q, ptr_q[CPTR_W-1:0], 9'b0};
    mem_req.we    = (op_q == AL_PUSH_P || op_q == AL_PUSH_C);
    mem_req.wstrb = STRB_W'(8'hFF);
    if (op_q == AL_PUSH_P) mem_req.wdata = LINE_W'(p_head_q);
    else                   mem_req.wdata = LINE_W'(c_head_q[sub_q]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      op_q      <= AL_POP_P;
      sub_q     <= '0;
      subr_q    <= '0;
      ptr_q     <= '0;
      p_head_q  <= P_NIL;
      p_front_q <= '0;
      p_free_q  <= NUM_PCHUNKS;
      done      <= 1'b0;
      done_ok   <= 1'b0;
      done_ptr  <= '0;
      for (int unsigned s = 0; s < NUM_SUBREGIONS; s++) begin
        c_head_q[s]  <= C_NIL;
        c_front_q[s] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (cmd_valid) begin
          op_q   <= cmd_op;
          sub_q  <= SI_W'(cmd_sub);
          subr_q <= cmd_sub;
          unique case (cmd_op)
            AL_POP_P: begin
              if (p_head_q != P_NIL) begin
                ptr_q   <= p_head_q;
                state_q <= S_REQ;
              end else if (p_front_q < NUM_PCHUNKS) begin
                p_front_q <= p_front_q + 1;
                p_free_q  <= p_free_q - 1;
                done      <= 1'b1;
                done_ok   <= 1'b1;
                done_ptr  <= P_BASE_PTR + PPTR_W'(p_front_q);
              end else begin
                done    <= 1'b1;
                done_ok <= 1'b0;
              end
            end
            AL_POP_C: begin
              if (c_head_q[SI_W'(cmd_sub)] != C_NIL) begin
                ptr_q   <= PPTR_W'(c_head_q[SI_W'(cmd_sub)]);
                state_q <= S_REQ;
              end else if (c_front_q[SI_W'(cmd_sub)] < C_CHUNKS) begin
                c_front_q[SI_W'(cmd_sub)] <= c_front_q[SI_W'(cmd_sub)] + 1;
                done     <= 1'b1;
                done_ok  <= 1'b1;
                done_ptr <= PPTR_W'(C_FIRST + CPTR_W'(c_front_q[SI_W'(cmd_sub)]));
              end else begin
                done    <= 1'b1;
                done_ok <= 1'b0;
              end
            end
            default: begin     // pushes
              ptr_q   <= cmd_ptr;
              state_q <= S_REQ;
            end
          endcase
        end
        S_REQ: if (mem_req_ready) state_q <= S_WAIT;
        S_WAIT: if (mem_resp_valid) begin
          state_q  <= S_IDLE;
          done     <= 1'b1;
          done_ok  <= 1'b1;
          done_ptr <= ptr_q;
          unique case (op_q)
            AL_POP_P: begin
              p_head_q <= mem_resp_rdata[PPTR_W-1:0];
              p_free_q <= p_free_q - 1;
            end
            AL_PUSH_P: begin
              p_head_q <= ptr_q;
              p_free_q <= p_free_q + 1;
            end
            AL_POP_C:  c_head_q[sub_q] <= mem_resp_rdata[CPTR_W-1:0];
            AL_PUSH_C: c_head_q[sub_q] <= ptr_q[CPTR_W-1:0];
            default: ;
          endcase
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A request must stay stable while it waits for the memory port.
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_req_valid && !mem_req_ready |=> mem_req_valid && mem_req == $past(mem_req))
    else $error("chunk_allocator: memory request changed while stalled");

endmodule
