// One FPGA of the direct-channel benchmark system: the b_eff, PTRANS and RandomAccess
// kernels of the HPC Challenge suite around the board's four external serial channels.
//
// - b_eff: BEFF_REPLICATIONS send/receive kernel pairs; pair k sends on and receives
//   from channels 2k and 2k+1 and hands each received chunk from its receive kernel to
//   its send kernel for the next message.
// - PTRANS: PTRANS_REPLICATIONS kernel pairs, one per channel; pair r sends the
//   transposed blocks of its A over channel r and adds the transposed blocks arriving
//   on channel r to its B, giving C.
// - RandomAccess: RA_REPLICATIONS kernels; replication r owns global table part
//   ra_repl_base + r and updates it through its own memory port.
//
// On the board every benchmark is a bitstream of its own; here they share one module,
// and bench_sel chooses whether b_eff or PTRANS owns the channels (the kernels of the
// other benchmark see no valid data and no ready). This sharing is this design's
// choice. Global memory (one bank per kernel replication) and the channel IP are
// outside: their signals are the ports. Channels are valid/ready streams of 256-bit
// words; memory read ports return data in order and never refuse a response.
module hpcc_node
  import hpcc_pkg::*;
#(
  parameter int unsigned NUM_CHANNELS          = 4,
  parameter int unsigned BEFF_REPLICATIONS     = 2,
  parameter int unsigned BEFF_CHANNEL_WIDTH    = 32,    // bytes
  parameter int unsigned PTRANS_REPLICATIONS   = 4,
  parameter int unsigned PTRANS_BLOCK_SIZE     = 512,
  parameter int unsigned PTRANS_CHANNEL_WIDTH  = 8,     // fp32 values
  parameter int unsigned RA_REPLICATIONS       = 4,
  parameter int unsigned RA_RNG_COUNT_LOG      = 5,
  parameter int unsigned RA_RNG_DISTANCE       = 5,
  parameter int unsigned RA_LOCAL_ADDR_W       = 28
) (
  input  logic clk,
  input  logic rst,
  input  bench_sel_e bench_sel,

  // external serial channels
  output logic [NUM_CHANNELS-1:0]              ch_tx_valid,
  input  logic [NUM_CHANNELS-1:0]              ch_tx_ready,
  output ch_word_t [NUM_CHANNELS-1:0]          ch_tx_data,
  input  logic [NUM_CHANNELS-1:0]              ch_rx_valid,
  output logic [NUM_CHANNELS-1:0]              ch_rx_ready,
  input  ch_word_t [NUM_CHANNELS-1:0]          ch_rx_data,

  // b_eff control and validation buffers
  input  logic                                 beff_start,
  input  logic [4:0]                           beff_msg_size_log,
  input  logic [31:0]                          beff_num_messages,
  output logic                                 beff_busy,
  output logic                                 beff_done,
  output logic [BEFF_REPLICATIONS-1:0]         beff_wr_valid,
  input  logic [BEFF_REPLICATIONS-1:0]         beff_wr_ready,
  output logic [BEFF_REPLICATIONS-1:0][2*BEFF_CHANNEL_WIDTH*8-1:0] beff_wr_data,

  // PTRANS control and memory ports
  input  logic                                 ptrans_start,
  input  logic [31:0]                          ptrans_num_blocks,
  input  logic [31:0]                          ptrans_a_base,
  input  logic [31:0]                          ptrans_b_base,
  input  logic [31:0]                          ptrans_c_base,
  output logic                                 ptrans_busy,
  output logic                                 ptrans_done,
  output logic [PTRANS_REPLICATIONS-1:0]       a_rd_req_valid,
  input  logic [PTRANS_REPLICATIONS-1:0]       a_rd_req_ready,
  output logic [PTRANS_REPLICATIONS-1:0][31:0] a_rd_req_addr,
  input  logic [PTRANS_REPLICATIONS-1:0]       a_rd_resp_valid,
  input  ch_word_t [PTRANS_REPLICATIONS-1:0]   a_rd_resp_data,
  output logic [PTRANS_REPLICATIONS-1:0]       b_rd_req_valid,
  input  logic [PTRANS_REPLICATIONS-1:0]       b_rd_req_ready,
  output logic [PTRANS_REPLICATIONS-1:0][31:0] b_rd_req_addr,
  input  logic [PTRANS_REPLICATIONS-1:0]       b_rd_resp_valid,
  input  ch_word_t [PTRANS_REPLICATIONS-1:0]   b_rd_resp_data,
  output logic [PTRANS_REPLICATIONS-1:0]       c_wr_valid,
  input  logic [PTRANS_REPLICATIONS-1:0]       c_wr_ready,
  output logic [PTRANS_REPLICATIONS-1:0][31:0] c_wr_addr,
  output ch_word_t [PTRANS_REPLICATIONS-1:0]   c_wr_data,

  // RandomAccess control and memory ports
  input  logic                                 ra_start,
  input  logic [31:0]                          ra_num_per_rng,
  input  logic [5:0]                           ra_total_size_log,
  input  logic [5:0]                           ra_local_size_log,
  input  logic [31:0]                          ra_repl_base,
  input  logic [RA_REPLICATIONS-1:0][(2**RA_RNG_COUNT_LOG)-1:0][63:0] ra_seeds,
  output logic                                 ra_busy,
  output logic                                 ra_done,
  output logic [RA_REPLICATIONS-1:0][31:0]     ra_updates,
  output logic [RA_REPLICATIONS-1:0][31:0]     ra_rng_stalls,
  output logic [RA_REPLICATIONS-1:0]           ra_rd_req_valid,
  input  logic [RA_REPLICATIONS-1:0]           ra_rd_req_ready,
  output logic [RA_REPLICATIONS-1:0][RA_LOCAL_ADDR_W-1:0] ra_rd_req_addr,
  input  logic [RA_REPLICATIONS-1:0]           ra_rd_resp_valid,
  input  logic [RA_REPLICATIONS-1:0][63:0]     ra_rd_resp_data,
  output logic [RA_REPLICATIONS-1:0]           ra_wr_valid,
  input  logic [RA_REPLICATIONS-1:0]           ra_wr_ready,
  output logic [RA_REPLICATIONS-1:0][RA_LOCAL_ADDR_W-1:0] ra_wr_addr,
  output logic [RA_REPLICATIONS-1:0][63:0]     ra_wr_data
);

  if (2 * BEFF_REPLICATIONS != NUM_CHANNELS || PTRANS_REPLICATIONS != NUM_CHANNELS)
    $error("each b_eff pair needs two channels and each PTRANS pair one");
  if (BEFF_CHANNEL_WIDTH * 8 != CH_BITS || PTRANS_CHANNEL_WIDTH * 32 != CH_BITS)
    $error("kernel channel widths must match the 256-bit external channel");

  // ---------------- b_eff ----------------
  logic [NUM_CHANNELS-1:0] be_tx_valid, be_tx_ready, be_rx_valid, be_rx_ready;
  ch_word_t [NUM_CHANNELS-1:0] be_tx_data;
  logic [BEFF_REPLICATIONS-1:0] be_s_busy, be_r_busy, be_s_done, be_r_done;
  logic [BEFF_REPLICATIONS-1:0] be_s_fin, be_r_fin;   // finished since start

  for (genvar k = 0; k < BEFF_REPLICATIONS; k++) begin : g_beff
    logic xchg_valid, xchg_ready;
    logic [2*BEFF_CHANNEL_WIDTH*8-1:0] xchg_data;

    beff_send #(.CHANNEL_WIDTH(BEFF_CHANNEL_WIDTH)) u_send (
      .clk, .rst, .start(beff_start), .msg_size_log(beff_msg_size_log),
      .num_messages(beff_num_messages),
      .tx_valid(be_tx_valid[2*k +: 2]), .tx_ready(be_tx_ready[2*k +: 2]),
      .tx_data(be_tx_data[2*k +: 2]),
      .xchg_valid, .xchg_ready, .xchg_data,
      .busy(be_s_busy[k]), .done(be_s_done[k]));

    beff_recv #(.CHANNEL_WIDTH(BEFF_CHANNEL_WIDTH)) u_recv (
      .clk, .rst, .start(beff_start), .msg_size_log(beff_msg_size_log),
      .num_messages(beff_num_messages),
      .rx_valid(be_rx_valid[2*k +: 2]), .rx_ready(be_rx_ready[2*k +: 2]),
      .rx_data(ch_rx_data[2*k +: 2]),
      .xchg_valid, .xchg_ready, .xchg_data,
      .wr_valid(beff_wr_valid[k]), .wr_ready(beff_wr_ready[k]), .wr_data(beff_wr_data[k]),
      .busy(be_r_busy[k]), .done(be_r_done[k]));
  end

  // ---------------- PTRANS ----------------
  logic [NUM_CHANNELS-1:0] pt_tx_valid, pt_tx_ready, pt_rx_valid, pt_rx_ready;
  ch_word_t [NUM_CHANNELS-1:0] pt_tx_data;
  logic [PTRANS_REPLICATIONS-1:0] pt_s_busy, pt_r_busy, pt_s_done, pt_r_done;
  logic [PTRANS_REPLICATIONS-1:0] pt_s_fin, pt_r_fin;

  for (genvar r = 0; r < PTRANS_REPLICATIONS; r++) begin : g_ptrans
    ptrans_transpose_send #(.BLOCK_SIZE(PTRANS_BLOCK_SIZE), .CHANNEL_WIDTH(PTRANS_CHANNEL_WIDTH)) u_send (
      .clk, .rst, .start(ptrans_start), .num_blocks(ptrans_num_blocks), .a_base(ptrans_a_base),
      .rd_req_valid(a_rd_req_valid[r]), .rd_req_ready(a_rd_req_ready[r]),
      .rd_req_addr(a_rd_req_addr[r]), .rd_resp_valid(a_rd_resp_valid[r]),
      .rd_resp_data(a_rd_resp_data[r]),
      .tx_valid(pt_tx_valid[r]), .tx_ready(pt_tx_ready[r]), .tx_data(pt_tx_data[r]),
      .busy(pt_s_busy[r]), .done(pt_s_done[r]));

    ptrans_recv_add #(.BLOCK_SIZE(PTRANS_BLOCK_SIZE), .CHANNEL_WIDTH(PTRANS_CHANNEL_WIDTH)) u_recv (
      .clk, .rst, .start(ptrans_start), .num_blocks(ptrans_num_blocks),
      .b_base(ptrans_b_base), .c_base(ptrans_c_base),
      .rx_valid(pt_rx_valid[r]), .rx_ready(pt_rx_ready[r]), .rx_data(ch_rx_data[r]),
      .rd_req_valid(b_rd_req_valid[r]), .rd_req_ready(b_rd_req_ready[r]),
      .rd_req_addr(b_rd_req_addr[r]), .rd_resp_valid(b_rd_resp_valid[r]),
      .rd_resp_data(b_rd_resp_data[r]),
      .wr_valid(c_wr_valid[r]), .wr_ready(c_wr_ready[r]), .wr_addr(c_wr_addr[r]),
      .wr_data(c_wr_data[r]),
      .busy(pt_r_busy[r]), .done(pt_r_done[r]));
  end

  // ---------------- channel ownership ----------------
  always_comb begin
    for (int c = 0; c < NUM_CHANNELS; c++) begin
      if (bench_sel == BENCH_BEFF) begin
        ch_tx_valid[c] = be_tx_valid[c];
        ch_tx_data[c]  = be_tx_data[c];
        ch_rx_ready[c] = be_rx_ready[c];
      end else begin
        ch_tx_valid[c] = pt_tx_valid[c];
        ch_tx_data[c]  = pt_tx_data[c];
        ch_rx_ready[c] = pt_rx_ready[c];
      end
      be_tx_ready[c] = (bench_sel == BENCH_BEFF)   && ch_tx_ready[c];
      be_rx_valid[c] = (bench_sel == BENCH_BEFF)   && ch_rx_valid[c];
      pt_tx_ready[c] = (bench_sel == BENCH_PTRANS) && ch_tx_ready[c];
      pt_rx_valid[c] = (bench_sel == BENCH_PTRANS) && ch_rx_valid[c];
    end
  end

  // ---------------- RandomAccess ----------------
  logic [RA_REPLICATIONS-1:0] ra_k_busy, ra_k_done, ra_fin;

  for (genvar r = 0; r < RA_REPLICATIONS; r++) begin : g_ra
    ra_kernel #(.RNG_COUNT_LOG(RA_RNG_COUNT_LOG), .RNG_DISTANCE(RA_RNG_DISTANCE),
                .LOCAL_ADDR_W(RA_LOCAL_ADDR_W)) u_ra (
      .clk, .rst, .start(ra_start), .num_per_rng(ra_num_per_rng),
      .total_size_log(ra_total_size_log), .local_size_log(ra_local_size_log),
      .repl_index(ra_repl_base + 32'(r)), .seeds(ra_seeds[r]),
      .rd_req_valid(ra_rd_req_valid[r]), .rd_req_ready(ra_rd_req_ready[r]),
      .rd_req_addr(ra_rd_req_addr[r]), .rd_resp_valid(ra_rd_resp_valid[r]),
      .rd_resp_data(ra_rd_resp_data[r]),
      .wr_valid(ra_wr_valid[r]), .wr_ready(ra_wr_ready[r]), .wr_addr(ra_wr_addr[r]),
      .wr_data(ra_wr_data[r]),
      .busy(ra_k_busy[r]), .done(ra_k_done[r]),
      .updates(ra_updates[r]), .rng_stalls(ra_rng_stalls[r]));
  end

  // ---------------- completion: a benchmark is done when all its kernels are ----------------
  assign beff_busy   = |{be_s_busy, be_r_busy};
  assign ptrans_busy = |{pt_s_busy, pt_r_busy};
  assign ra_busy     = |ra_k_busy;

  always_ff @(posedge clk) begin
    beff_done   <= 1'b0;
    ptrans_done <= 1'b0;
    ra_done     <= 1'b0;
    if (rst || beff_start) begin
      be_s_fin <= '0; be_r_fin <= '0;
    end else begin
      be_s_fin <= be_s_fin | be_s_done;
      be_r_fin <= be_r_fin | be_r_done;
      if (&(be_s_fin | be_s_done) && &(be_r_fin | be_r_done) && !(&be_s_fin && &be_r_fin))
        beff_done <= 1'b1;
    end
    if (rst || ptrans_start) begin
      pt_s_fin <= '0; pt_r_fin <= '0;
    end else begin
      pt_s_fin <= pt_s_fin | pt_s_done;
      pt_r_fin <= pt_r_fin | pt_r_done;
      if (&(pt_s_fin | pt_s_done) && &(pt_r_fin | pt_r_done) && !(&pt_s_fin && &pt_r_fin))
        ptrans_done <= 1'b1;
    end
    if (rst || ra_start) begin
      ra_fin <= '0;
    end else begin
      ra_fin <= ra_fin | ra_k_done;
      if (&(ra_fin | ra_k_done) && !(&ra_fin)) ra_done <= 1'b1;
    end
  end

endmodule
