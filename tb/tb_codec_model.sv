// tb_codec_model: behavioural stand-in for the 1KB block compressor and
// decompressor, used by the testbenches only.
//
// The real codec is an external block.  This model keeps its interface and its
// latencies (COMP_LATENCY from the last input line to the first output line of a
// compression, DECOMP_LATENCY for a decompression) and uses a toy algorithm that
// round-trips exactly: a block is compressed by dropping its trailing all-zero
// 64B lines.  With n leading lines kept, the size code is s = ceil(n/2)-1 and the
// compressed block is 2(s+1) lines; an all-zero block reports ZERO (one beat, no
// data), and a block needing the full 1KB (s = 7) reports RAW with its 16 lines.
// Decompression pads the lines it receives with zero lines up to 16.
// Handshake: cmd (comp=1 compress) accepted while idle; then input lines until
// in_last; then output lines with valid/ready, status and size on every beat.
module tb_codec_model
  import ibex_pkg::*;
#(
  parameter int unsigned COMP_LATENCY   = 256,
  parameter int unsigned DECOMP_LATENCY = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cx_cmd_valid,
  output logic              cx_cmd_ready,
  input  logic              cx_cmd_comp,
  input  logic              cx_in_valid,
  output logic              cx_in_ready,
  input  logic [LINE_W-1:0] cx_in_data,
  input  logic              cx_in_last,
  output logic              cx_out_valid,
  input  logic              cx_out_ready,
  output logic [LINE_W-1:0] cx_out_data,
  output logic              cx_out_last,
  output codec_status_e     cx_out_status,
  output logic [2:0]        cx_out_size,
  output int unsigned       n_comp,
  output int unsigned       n_decomp,
  output int unsigned       last_latency   // cycles from last input to first output
);

  typedef enum logic [1:0] {C_IDLE, C_IN, C_WAIT, C_OUT} cst_e;

  cst_e              st;
  logic              comp;
  logic [LINE_W-1:0] buffer [16];
  int unsigned       nin, nout, oi, cnt;
  codec_status_e     status;
  logic [2:0]        size;

  assign cx_cmd_ready  = (st == C_IDLE);
  assign cx_in_ready   = (st == C_IN);
  assign cx_out_valid  = (st == C_OUT);
  assign cx_out_data   = (status == CS_ZERO) ? '0 : buffer[oi];
  assign cx_out_last   = (oi + 1 == nout);
  assign cx_out_status = status;
  assign cx_out_size   = size;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; comp <= 1'b0; nin <= 0; nout <= 0; oi <= 0; cnt <= 0;
      status <= CS_ZERO; size <= '0; n_comp <= 0; n_decomp <= 0; last_latency <= 0;
      for (int i = 0; i < 16; i++) buffer[i] <= '0;
    end else begin
      unique case (st)
        C_IDLE: if (cx_cmd_valid) begin
          comp <= cx_cmd_comp;
          nin  <= 0;
          for (int i = 0; i < 16; i++) buffer[i] <= '0;
          st   <= C_IN;
        end
        C_IN: if (cx_in_valid) begin
          buffer[nin[3:0]] <= cx_in_data;
          nin <= nin + 1;
          if (cx_in_last) begin
            cnt <= 1;
            st  <= C_WAIT;
          end
        end
        C_WAIT: begin
          if (cnt == (comp ? COMP_LATENCY : DECOMP_LATENCY)) begin
            int unsigned n;
            n = 0;
            for (int i = 0; i < 16; i++) if (buffer[i] != '0) n = i + 1;
            oi <= 0;
            last_latency <= cnt;
            if (!comp) begin
              n_decomp <= n_decomp + 1;
              status   <= CS_COMP;
              size     <= '0;
              nout     <= 16;
            end else begin
              n_comp <= n_comp + 1;
              if (n == 0) begin
                status <= CS_ZERO; size <= '0; nout <= 1;
              end else if ((n + 1) / 2 - 1 >= 7) begin
                status <= CS_RAW; size <= 3'd7; nout <= 16;
              end else begin
                status <= CS_COMP; size <= 3'((n + 1) / 2 - 1); nout <= 2 * ((n + 1) / 2);
              end
            end
            st <= C_OUT;
          end else cnt <= cnt + 1;
        end
        C_OUT: if (cx_out_ready) begin
          if (oi + 1 == nout) st <= C_IDLE;
          else oi <= oi + 1;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

endmodule
