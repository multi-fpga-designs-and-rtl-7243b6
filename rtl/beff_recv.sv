// b_eff receive kernel: receives a message of L = 2**msg_size_log bytes from two
// external channels, num_messages times.
//
// Each channel delivers ceil(L / (2*CHANNEL_WIDTH)) words per message; the kernel keeps
// the last word of each channel, which together form the 2*CHANNEL_WIDTH-byte message
// chunk (channel 0 in the lower half). After every complete message except the last it
// hands the chunk to the send kernel over the internal exchange channel, so the next
// message can only start once this one has fully arrived. After the last message the
// chunk is written once to the validation buffer in global memory instead.
//
// Interface: start (pulse, sampled with msg_size_log and num_messages), per-channel
// valid/ready/data inputs, the exchange channel output, a one-word write port to the
// validation buffer (valid/ready), busy and a done pulse once the write is accepted.
// Timing: one word per channel per cycle; the exchange and the write take one cycle
// each once accepted. The chunk layout and handshakes are this design's choices.
module beff_recv #(
  parameter int unsigned CHANNEL_WIDTH = 32
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         start,
  input  logic [4:0]                   msg_size_log,
  input  logic [31:0]                  num_messages,
  // external channels (receive side)
  input  logic [1:0]                   rx_valid,
  output logic [1:0]                   rx_ready,
  input  logic [1:0][CHANNEL_WIDTH*8-1:0] rx_data,
  // internal exchange channel to the send kernel
  output logic                         xchg_valid,
  input  logic                         xchg_ready,
  output logic [2*CHANNEL_WIDTH*8-1:0] xchg_data,
  // validation buffer write
  output logic                         wr_valid,
  input  logic                         wr_ready,
  output logic [2*CHANNEL_WIDTH*8-1:0] wr_data,
  output logic                         busy,
  output logic                         done
);

  localparam int unsigned CHUNK_LOG = $clog2(2 * CHANNEL_WIDTH);

  typedef enum logic [1:0] {S_IDLE, S_RECV, S_XCHG, S_STORE} state_e;
  state_e state;

  logic [1:0][CHANNEL_WIDTH*8-1:0] last;
  logic [31:0]                     n_chunks, msgs_left;
  logic [1:0][31:0]                got;
  logic [1:0]                      ch_done, ch_last;

  function automatic logic [31:0] chunks_of(input logic [4:0] lg);
    if (32'(lg) <= CHUNK_LOG) return 32'd1;
    return 32'd1 << (32'(lg) - CHUNK_LOG);
  endfunction

  always_comb begin
    for (int c = 0; c < 2; c++) begin
      ch_done[c]  = (got[c] == n_chunks);
      rx_ready[c] = (state == S_RECV) && !ch_done[c];
      ch_last[c]  = ch_done[c] || (rx_valid[c] && rx_ready[c] && got[c] + 32'd1 == n_chunks);
    end
    xchg_valid = (state == S_XCHG);
    xchg_data  = last;
    wr_valid   = (state == S_STORE);
    wr_data    = last;
    busy       = (state != S_IDLE);
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state     <= S_IDLE;
      got       <= '0;
      n_chunks  <= 32'd1;
      msgs_left <= '0;
      last      <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          n_chunks  <= chunks_of(msg_size_log);
          msgs_left <= num_messages;
          got       <= '0;
          if (num_messages == 32'd0) done <= 1'b1;
          else                       state <= S_RECV;
        end
        S_RECV: begin
          for (int c = 0; c < 2; c++)
            if (rx_valid[c] && rx_ready[c]) begin
              got[c]  <= got[c] + 32'd1;
              last[c] <= rx_data[c];
            end
          if (ch_last[0] && ch_last[1]) begin
            got       <= '0;
            msgs_left <= msgs_left - 32'd1;
            state     <= (msgs_left == 32'd1) ? S_STORE : S_XCHG;
          end
        end
        S_XCHG:  if (xchg_ready) state <= S_RECV;
        S_STORE: if (wr_ready) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (rst)
    state == S_RECV |-> got[0] <= n_chunks && got[1] <= n_chunks);

endmodule
