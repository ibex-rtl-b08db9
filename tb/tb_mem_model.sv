// tb_mem_model: behavioural model of the device memory (DDR5 behind the
// controller), used by the testbenches only.
//
// Sparse: an associative array of 64B lines keyed by line address; lines never
// written read as zero.  One request at a time: req_ready is high while idle, and
// every request, read or write, is answered by one resp_valid pulse LATENCY cycles
// after it was accepted.  Writes honour the byte strobes.  Counts reads and writes.
module tb_mem_model
  import ibex_pkg::*;
#(
  parameter int unsigned LATENCY = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mem_req_valid,
  output logic              mem_req_ready,
  input  mem_req_t          mem_req,
  output logic              mem_resp_valid,
  output logic [LINE_W-1:0] mem_resp_rdata,
  output int unsigned       n_reads,
  output int unsigned       n_writes
);

  logic [LINE_W-1:0] mem [logic [ADDR_W-7:0]];
  logic              busy;
  int unsigned       cnt;
  mem_req_t          cur;

  assign mem_req_ready = !busy;

  function automatic logic [LINE_W-1:0] peek(logic [ADDR_W-1:0] a);
    logic [ADDR_W-7:0] k;
    k = a[ADDR_W-1:6];
    return mem.exists(k) ? mem[k] : '0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy           <= 1'b0;
      cnt            <= 0;
      cur            <= '0;
      mem_resp_valid <= 1'b0;
      mem_resp_rdata <= '0;
      n_reads        <= 0;
      n_writes       <= 0;
    end else begin
      mem_resp_valid <= 1'b0;
      if (!busy) begin
        if (mem_req_valid) begin
          busy <= 1'b1;
          cnt  <= 1;
          cur  <= mem_req;
        end
      end else if (cnt < LATENCY) begin
        cnt <= cnt + 1;
      end else begin
        logic [LINE_W-1:0] line;
        busy           <= 1'b0;
        mem_resp_valid <= 1'b1;
        line = peek(cur.addr);
        if (cur.we) begin
          for (int i = 0; i < STRB_W; i++)
            if (cur.wstrb[i]) line[8*i +: 8] = cur.wdata[8*i +: 8];
          mem[cur.addr[ADDR_W-1:6]] = line;
          n_writes <= n_writes + 1;
          mem_resp_rdata <= '0;
        end else begin
          n_reads        <= n_reads + 1;
          mem_resp_rdata <= line;
        end
      end
    end
  end

endmodule
