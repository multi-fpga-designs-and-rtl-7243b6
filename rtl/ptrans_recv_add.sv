// PTRANS receive kernel of the direct-channel version: C = B + A^T, one channel word
// (CHANNEL_WIDTH single-precision values) per cycle.
//
// The transposed blocks of A arrive from an external channel in row-major order of
// the result. For every arriving word the kernel takes the matching word of B from
// global memory, adds the two value by value with CHANNEL_WIDTH fp32 adders and writes
// the word of C to global memory. As in the paper it holds no block memory: reads of B
// are issued ahead into a small prefetch FIFO (B_FIFO_DEPTH words, this design's
// choice) so the read latency is hidden and the kernel can accept a channel word each
// cycle. B and C are stored like A: consecutive blocks, row-major, starting at b_base
// and c_base.
//
// Interface: start pulse with num_blocks, b_base, c_base; channel input
// (valid/ready/data); global memory read port for B (request valid/ready/address,
// in-order response valid/data, always accepted); write port for C (valid/ready/
// address/data); busy and a done pulse once the last word of C has been accepted.
// Timing: the sum is registered, so C leaves one cycle after its channel word arrives.
module ptrans_recv_add #(
  parameter int unsigned BLOCK_SIZE    = 512,
  parameter int unsigned CHANNEL_WIDTH = 8,
  parameter int unsigned B_FIFO_DEPTH  = 16
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        start,
  input  logic [31:0]                 num_blocks,
  input  logic [31:0]                 b_base,
  input  logic [31:0]                 c_base,
  // external channel (transposed A)
  input  logic                        rx_valid,
  output logic                        rx_ready,
  input  logic [CHANNEL_WIDTH*32-1:0] rx_data,
  // global memory read port (matrix B)
  output logic                        rd_req_valid,
  input  logic                        rd_req_ready,
  output logic [31:0]                 rd_req_addr,
  input  logic                        rd_resp_valid,
  input  logic [CHANNEL_WIDTH*32-1:0] rd_resp_data,
  // global memory write port (matrix C)
  output logic                        wr_valid,
  input  logic                        wr_ready,
  output logic [31:0]                 wr_addr,
  output logic [CHANNEL_WIDTH*32-1:0] wr_data,
  output logic                        busy,
  output logic                        done
);

  localparam int unsigned CW  = CHANNEL_WIDTH;
  localparam int unsigned WPB = BLOCK_SIZE * BLOCK_SIZE / CW;
  localparam int unsigned FL  = $clog2(B_FIFO_DEPTH);

  logic        running;
  logic [31:0] total, req_cnt, in_cnt, out_cnt;
  logic [FL:0] outstanding, fcount;           // B reads in flight, words in the FIFO
  logic [FL-1:0] wptr, rptr;
  logic [CW*32-1:0] fifo [B_FIFO_DEPTH];
  logic [CW*32-1:0] b_word, sum;
  logic        take, pop, req_fire;

  assign req_fire     = rd_req_valid && rd_req_ready;
  assign rd_req_valid = running && (req_cnt < total) &&
                        (32'(outstanding) + 32'(fcount) < B_FIFO_DEPTH);
  assign rd_req_addr  = b_base + req_cnt;

  assign b_word   = fifo[rptr];
  assign rx_ready = running && (fcount != '0) && (in_cnt < total) && (!wr_valid || wr_ready);
  assign take     = rx_valid && rx_ready;
  assign pop      = take;

  for (genvar k = 0; k < CW; k++) begin : g_add
    fp32_add u_add (.a(rx_data[32*k +: 32]), .b(b_word[32*k +: 32]), .y(sum[32*k +: 32]));
  end

  assign busy = running;

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rd_resp_valid) fifo[wptr] <= rd_resp_data;
    if (rst) begin
      running     <= 1'b0;
      total       <= '0;
      req_cnt     <= '0;
      in_cnt      <= '0;
      out_cnt     <= '0;
      outstanding <= '0;
      fcount      <= '0;
      wptr        <= '0;
      rptr        <= '0;
      wr_valid    <= 1'b0;
      wr_addr     <= '0;
      wr_data     <= '0;
    end else if (!running) begin
      if (start) begin
        total   <= num_blocks * WPB;
        req_cnt <= '0;
        in_cnt  <= '0;
        out_cnt <= '0;
        if (num_blocks == 32'd0) done <= 1'b1;
        else                     running <= 1'b1;
      end
    end else begin
      if (req_fire) req_cnt <= req_cnt + 32'd1;
      outstanding <= outstanding + (FL+1)'(req_fire) - (FL+1)'(rd_resp_valid);
      fcount      <= fcount + (FL+1)'(rd_resp_valid) - (FL+1)'(pop);
      if (rd_resp_valid) wptr <= wptr + 1'b1;
      if (pop)           rptr <= rptr + 1'b1;
      if (wr_valid && wr_ready) begin
        wr_valid <= 1'b0;
        out_cnt  <= out_cnt + 32'd1;
        if (out_cnt + 32'd1 == total) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
      if (take) begin
        wr_valid <= 1'b1;
        wr_addr  <= c_base + in_cnt;
        wr_data  <= sum;
        in_cnt   <= in_cnt + 32'd1;
      end
    end
  end

  a_fifo_no_overflow: assert property (@(posedge clk) disable iff (rst)
    32'(fcount) + 32'(outstanding) <= B_FIFO_DEPTH);
  a_wr_hold: assert property (@(posedge clk) disable iff (rst)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr) && $stable(wr_data));

endmodule
