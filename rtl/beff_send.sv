// b_eff send kernel: streams a message of L = 2**msg_size_log bytes over two external
// channels, num_messages times.
//
// One message chunk is 2*CHANNEL_WIDTH bytes: its lower half goes out on channel 0,
// its upper half on channel 1, so a cycle in which both channels accept moves
// 2*CHANNEL_WIDTH bytes. A message is ceil(L / (2*CHANNEL_WIDTH)) chunk transfers on
// each channel (all repeating the same chunk), as in the paper's bandwidth model.
// The first message uses a generated chunk whose bytes all hold msg_size_log mod 256
// (ld(L) mod 256). Every later message waits until the receive kernel hands over the
// chunk it received, over the internal exchange channel, and then sends that chunk.
//
// Interface: start (one-cycle pulse, sampled with msg_size_log and num_messages),
// per-channel valid/ready/data outputs, the exchange channel input (valid/ready),
// busy while running and a done pulse after the last chunk has left.
// Timing: each channel sends one chunk half per cycle while its ready is high; the
// two channels count separately, so one may run ahead of the other within a message.
// The message chunk layout over the two channels and the valid/ready handshake are
// this design's choices; the kernel behaviour follows the paper.
module beff_send #(
  parameter int unsigned CHANNEL_WIDTH = 32   // bytes per external channel word
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         start,
  input  logic [4:0]                   msg_size_log,
  input  logic [31:0]                  num_messages,
  // external channels (transmit side)
  output logic [1:0]                   tx_valid,
  input  logic [1:0]                   tx_ready,
  output logic [1:0][CHANNEL_WIDTH*8-1:0] tx_data,
  // internal exchange channel from the receive kernel
  input  logic                         xchg_valid,
  output logic                         xchg_ready,
  input  logic [2*CHANNEL_WIDTH*8-1:0] xchg_data,
  output logic                         busy,
  output logic                         done
);

  localparam int unsigned CHUNK_LOG = $clog2(2 * CHANNEL_WIDTH);

  typedef enum logic [1:0] {S_IDLE, S_SEND, S_WAIT_XCHG} state_e;
  state_e state;

  logic [2*CHANNEL_WIDTH*8-1:0] chunk;
  logic [31:0]                  n_chunks, msgs_left;
  logic [1:0][31:0]             sent;
  logic [1:0]                   ch_done;

  // Chunks per message: ceil(2**log / 2**CHUNK_LOG).
  function automatic logic [31:0] chunks_of(input logic [4:0] lg);
    if (32'(lg) <= CHUNK_LOG) return 32'd1;
    return 32'd1 << (32'(lg) - CHUNK_LOG);
  endfunction

  always_comb begin
    for (int c = 0; c < 2; c++) begin
      ch_done[c]  = (sent[c] == n_chunks);
      tx_valid[c] = (state == S_SEND) && !ch_done[c];
      tx_data[c]  = chunk[c*CHANNEL_WIDTH*8 +: CHANNEL_WIDTH*8];
    end
    xchg_ready = (state == S_WAIT_XCHG);
    busy       = (state != S_IDLE);
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state     <= S_IDLE;
      sent      <= '0;
      n_chunks  <= 32'd1;
      msgs_left <= '0;
      chunk     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          n_chunks  <= chunks_of(msg_size_log);
          msgs_left <= num_messages;
          chunk     <= {(2*CHANNEL_WIDTH){3'd0, msg_size_log}};
          sent      <= '0;
          if (num_messages == 32'd0) done <= 1'b1;
          else                       state <= S_SEND;
        end
        S_SEND: begin
          for (int c = 0; c < 2; c++)
            if (tx_valid[c] && tx_ready[c]) sent[c] <= sent[c] + 32'd1;
          // The message is complete once both channels have sent every chunk.
          if ((ch_done[0] || (sent[0] + 32'd1 == n_chunks && tx_ready[0])) &&
              (ch_done[1] || (sent[1] + 32'd1 == n_chunks && tx_ready[1]))) begin
            sent      <= '0;
            msgs_left <= msgs_left - 32'd1;
            if (msgs_left == 32'd1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_WAIT_XCHG;
            end
          end
        end
        S_WAIT_XCHG: if (xchg_valid) begin
          chunk <= xchg_data;
          state <= S_SEND;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A channel word, once offered, stays offered until it is taken.
  for (genvar c = 0; c < 2; c++) begin : g_hold
    a_hold: assert property (@(posedge clk) disable iff (rst)
      tx_valid[c] && !tx_ready[c] |=> tx_valid[c] && $stable(tx_data[c]));
  end

endmodule
