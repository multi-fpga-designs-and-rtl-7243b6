// PTRANS send kernel of the direct-channel version: reads blocks of A from global
// memory and writes each block transposed into one external channel.
//
// A block is BLOCK_SIZE x BLOCK_SIZE single-precision values, stored row-major as
// words of CHANNEL_WIDTH values. The kernel fills one half of a double-buffered local
// block memory from global memory while it drains the other half, transposed, into
// the channel, so reading and sending overlap as in the paper's single pipeline.
// To read CHANNEL_WIDTH values of one column in one cycle, each half is split into
// CHANNEL_WIDTH banks and element (i, j) is kept in bank (i + j) mod CHANNEL_WIDTH at
// address i*BLOCK_SIZE/CHANNEL_WIDTH + j/CHANNEL_WIDTH. A row write and a column read
// then touch every bank once; the read data is rotated back into order. This banking
// scheme is this design's own; the paper gives only the buffering and transposition.
//
// Interface: start pulse with num_blocks and a_base (word address of the first block;
// block b starts at a_base + b*BLOCK_SIZE*BLOCK_SIZE/CHANNEL_WIDTH); a global memory
// read port (request valid/ready/address, in-order response valid/data that is always
// accepted); the channel output (valid/ready/data, value k of a word in bits
// [32k+31:32k]); busy and a done pulse after the last word has been accepted.
// Timing: one channel word per cycle while the channel accepts and a block is ready;
// the block memory has one cycle of read latency, held by the output register.
module ptrans_transpose_send #(
  parameter int unsigned BLOCK_SIZE    = 512,
  parameter int unsigned CHANNEL_WIDTH = 8
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          start,
  input  logic [31:0]                   num_blocks,
  input  logic [31:0]                   a_base,
  // global memory read port (matrix A)
  output logic                          rd_req_valid,
  input  logic                          rd_req_ready,
  output logic [31:0]                   rd_req_addr,
  input  logic                          rd_resp_valid,
  input  logic [CHANNEL_WIDTH*32-1:0]   rd_resp_data,
  // external channel
  output logic                          tx_valid,
  input  logic                          tx_ready,
  output logic [CHANNEL_WIDTH*32-1:0]   tx_data,
  output logic                          busy,
  output logic                          done
);

  localparam int unsigned CW    = CHANNEL_WIDTH;
  localparam int unsigned WPR   = BLOCK_SIZE / CW;          // words per row
  localparam int unsigned WPB   = BLOCK_SIZE * WPR;         // words per block
  localparam int unsigned DEPTH = WPB;                      // entries per bank and half
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned CWL   = $clog2(CW);
  localparam int unsigned WPRL  = $clog2(WPR);

  logic        running;
  logic [31:0] blocks_total;
  // fill side
  logic        fill_sel;
  logic [31:0] fill_blk, req_cnt, resp_cnt;
  logic [1:0]  full;
  // drain side
  logic        drain_sel;
  logic [31:0] drain_blk, out_cnt;
  logic        issue, adv, out_valid;
  logic [CWL-1:0] out_rot;

  logic [CW-1:0][31:0] wr_val, rd_val;
  logic [CW-1:0][AW-1:0] rd_addr;
  logic [AW-1:0] wr_addr;
  logic [CW-1:0] wr_en;

  // ---------------- fill: global memory -> block memory ----------------
  logic fill_active;
  assign fill_active  = running && (fill_blk < blocks_total) && !full[fill_sel];
  assign rd_req_valid = fill_active && (req_cnt < WPB);
  assign rd_req_addr  = a_base + fill_blk * WPB + req_cnt;

  // Response word resp_cnt is row i, column word cw; value k goes to bank (k+i) mod CW.
  logic [31:0] f_row, f_cw;
  always_comb begin
    f_row   = resp_cnt >> WPRL;
    f_cw    = resp_cnt & (WPR - 1);
    wr_addr = AW'(f_row * WPR + f_cw);
    for (int b = 0; b < CW; b++) begin
      wr_val[b] = rd_resp_data[32*((b - f_row) & (CW - 1)) +: 32];
      wr_en[b]  = rd_resp_valid;
    end
  end

  // ---------------- drain: block memory -> channel (transposed) ----------------
  // Output word out_cnt is transposed row r (column r of A), chunk c of rows
  // i0 = c*CW .. i0+CW-1. Value k comes from bank (r+k) mod CW at address
  // (i0+k)*WPR + r/CW; bank b therefore holds value k = (b - r) mod CW.
  logic [31:0] d_r, d_i0;
  always_comb begin
    d_r  = out_cnt >> WPRL;
    d_i0 = (out_cnt & (WPR - 1)) * CW;
    for (int b = 0; b < CW; b++)
      rd_addr[b] = AW'((d_i0 + ((b - d_r) & (CW - 1))) * WPR + (d_r >> CWL));
  end

  assign issue = running && full[drain_sel] && (out_cnt < WPB);
  assign adv   = !out_valid || tx_ready;

  for (genvar b = 0; b < CW; b++) begin : g_bank
    logic [31:0] mem [2*DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en[b]) mem[{fill_sel, wr_addr}] <= wr_val[b];
      if (adv && issue) rd_val[b] <= mem[{drain_sel, rd_addr[b]}];
    end
  end

  always_comb begin
    for (int k = 0; k < CW; k++)
      tx_data[32*k +: 32] = rd_val[(k + 32'(out_rot)) & (CW - 1)];
  end
  assign tx_valid = out_valid;
  assign busy     = running;

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      running   <= 1'b0;
      blocks_total <= '0;
      fill_sel  <= 1'b0;
      fill_blk  <= '0;
      req_cnt   <= '0;
      resp_cnt  <= '0;
      full      <= '0;
      drain_sel <= 1'b0;
      drain_blk <= '0;
      out_cnt   <= '0;
      out_valid <= 1'b0;
      out_rot   <= '0;
    end else if (!running) begin
      if (start) begin
        blocks_total <= num_blocks;
        fill_sel  <= 1'b0;
        fill_blk  <= '0;
        req_cnt   <= '0;
        resp_cnt  <= '0;
        full      <= '0;
        drain_sel <= 1'b0;
        drain_blk <= '0;
        out_cnt   <= '0;
        if (num_blocks == 32'd0) done <= 1'b1;
        else                     running <= 1'b1;
      end
    end else begin
      // fill side
      if (rd_req_valid && rd_req_ready) req_cnt <= req_cnt + 32'd1;
      if (rd_resp_valid) begin
        if (resp_cnt == WPB - 1) begin
          resp_cnt <= '0;
          req_cnt  <= '0;
          full[fill_sel] <= 1'b1;
          fill_sel <= ~fill_sel;
          fill_blk <= fill_blk + 32'd1;
        end else begin
          resp_cnt <= resp_cnt + 32'd1;
        end
      end
      // drain side
      if (adv) begin
        out_valid <= issue;
        out_rot   <= CWL'(d_r);
        if (issue) begin
          if (out_cnt == WPB - 1) begin
            out_cnt <= '0;
            full[drain_sel] <= 1'b0;
            drain_sel <= ~drain_sel;
            drain_blk <= drain_blk + 32'd1;
          end else begin
            out_cnt <= out_cnt + 32'd1;
          end
        end
      end
      if (drain_blk == blocks_total && (!out_valid || tx_ready) && !issue) begin
        running   <= 1'b0;
        out_valid <= 1'b0;
        done      <= 1'b1;
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (rst)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));
  a_resp_expected: assert property (@(posedge clk) disable iff (rst)
    rd_resp_valid |-> running && !full[fill_sel]);

endmodule
