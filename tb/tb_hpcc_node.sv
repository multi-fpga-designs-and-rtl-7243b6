// End-to-end testbench of hpcc_node at its default parameters: two nodes (two FPGAs)
// whose four external channels are linked back to back through fixed-latency channel
// models, each with its own memory models.
//
// 1. b_eff: both nodes exchange 4 messages of 2 KiB in a ring over the two FPGAs; the
//    validation buffers must hold the generated chunk (every byte ld(L) = 11), the
//    chunk must have gone through the exchange channel, and the run time is compared
//    with the model ceil(L/64 B)*i cycles + i*(channel latency) plus a small overhead.
// 2. PTRANS: each replication of node 0 sends two 512 x 512 blocks of A transposed to
//    node 1, and node 1 to node 0; every word of C = B + A^T is checked on both nodes.
//    Double buffering (a fill overlapping a drain) and channel back-pressure must occur.
// 3. RandomAccess: all replications of both nodes update their parts of a table split
//    over 8 replications; every write must be an expected update, the update counts
//    must match, and generator stalls and dropped out-of-range numbers must occur.
// 4. The benchmark select must have switched between b_eff and PTRANS.
// Each mechanism is counted and a failure is counted for any that never happened.
module tb_hpcc_node;
  import hpcc_pkg::*;
  import fp32_ref_pkg::*;

  localparam int NPB = 2;   // PTRANS blocks per replication
  localparam int NC = 4, NBE = 2, NPT = 4, NRA = 4, BS = 512, CW = 8, WPB = BS * BS / CW;
  localparam int NRNG = 32, LAT = 82;
  localparam int RA_TL = 14, RA_LL = 11, RA_NPR = 24;      // 8 replications x 2048 words
  localparam int BE_LG = 11, BE_N = 4;
  localparam int AB = 0, BB = 1 << 20, CB = 1 << 21;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------------ nodes
  bench_sel_e bench_sel;
  logic [1:0][NC-1:0] tx_valid, tx_ready, rx_valid, rx_ready;
  ch_word_t [1:0][NC-1:0] tx_data, rx_data;
  logic beff_start, ptrans_start, ra_start;
  logic [1:0] beff_busy, beff_done, ptrans_busy, ptrans_done, ra_busy, ra_done;
  logic [1:0][NBE-1:0] be_wr_valid, be_wr_ready;
  logic [1:0][NBE-1:0][511:0] be_wr_data;
  logic [1:0][NPT-1:0] a_rq_v, a_rq_r, a_rs_v, b_rq_v, b_rq_r, b_rs_v, c_wv, c_wr;
  logic [1:0][NPT-1:0][31:0] a_rq_a, b_rq_a, c_wa;
  ch_word_t [1:0][NPT-1:0] a_rs_d, b_rs_d, c_wd;
  logic [1:0][NRA-1:0] ra_rq_v, ra_rq_r, ra_rs_v, ra_wv, ra_wr;
  logic [1:0][NRA-1:0][27:0] ra_rq_a, ra_wa;
  logic [1:0][NRA-1:0][63:0] ra_rs_d, ra_wd;
  logic [1:0][NRA-1:0][31:0] ra_updates, ra_stalls;
  logic [1:0][NRA-1:0][NRNG-1:0][63:0] seeds;

  for (genvar n = 0; n < 2; n++) begin : g_node
    hpcc_node u_node (
      .clk, .rst, .bench_sel,
      .ch_tx_valid(tx_valid[n]), .ch_tx_ready(tx_ready[n]), .ch_tx_data(tx_data[n]),
      .ch_rx_valid(rx_valid[n]), .ch_rx_ready(rx_ready[n]), .ch_rx_data(rx_data[n]),
      .beff_start, .beff_msg_size_log(5'(BE_LG)), .beff_num_messages(32'(BE_N)),
      .beff_busy(beff_busy[n]), .beff_done(beff_done[n]),
      .beff_wr_valid(be_wr_valid[n]), .beff_wr_ready(be_wr_ready[n]), .beff_wr_data(be_wr_data[n]),
      .ptrans_start, .ptrans_num_blocks(32'(NPB)), .ptrans_a_base(32'(AB)),
      .ptrans_b_base(32'(BB)), .ptrans_c_base(32'(CB)),
      .ptrans_busy(ptrans_busy[n]), .ptrans_done(ptrans_done[n]),
      .a_rd_req_valid(a_rq_v[n]), .a_rd_req_ready(a_rq_r[n]), .a_rd_req_addr(a_rq_a[n]),
      .a_rd_resp_valid(a_rs_v[n]), .a_rd_resp_data(a_rs_d[n]),
      .b_rd_req_valid(b_rq_v[n]), .b_rd_req_ready(b_rq_r[n]), .b_rd_req_addr(b_rq_a[n]),
      .b_rd_resp_valid(b_rs_v[n]), .b_rd_resp_data(b_rs_d[n]),
      .c_wr_valid(c_wv[n]), .c_wr_ready(c_wr[n]), .c_wr_addr(c_wa[n]), .c_wr_data(c_wd[n]),
      .ra_start, .ra_num_per_rng(32'(RA_NPR)), .ra_total_size_log(6'(RA_TL)),
      .ra_local_size_log(6'(RA_LL)), .ra_repl_base(32'(n * NRA)), .ra_seeds(seeds[n]),
      .ra_busy(ra_busy[n]), .ra_done(ra_done[n]),
      .ra_updates(ra_updates[n]), .ra_rng_stalls(ra_stalls[n]),
      .ra_rd_req_valid(ra_rq_v[n]), .ra_rd_req_ready(ra_rq_r[n]), .ra_rd_req_addr(ra_rq_a[n]),
      .ra_rd_resp_valid(ra_rs_v[n]), .ra_rd_resp_data(ra_rs_d[n]),
      .ra_wr_valid(ra_wv[n]), .ra_wr_ready(ra_wr[n]), .ra_wr_addr(ra_wa[n]), .ra_wr_data(ra_wd[n]));

    // channel c of node n transmits to channel c of the other node
    for (genvar c = 0; c < NC; c++) begin : g_ch
      ext_channel_model #(.W(256), .LATENCY(LAT), .DEPTH(96)) u_link (
        .clk, .rst, .in_valid(tx_valid[n][c]), .in_ready(tx_ready[n][c]), .in_data(tx_data[n][c]),
        .out_valid(rx_valid[1-n][c]), .out_ready(rx_ready[1-n][c]), .out_data(rx_data[1-n][c]));
    end

    for (genvar r = 0; r < NPT; r++) begin : g_ptm
      logic unused_wr_ready;
      // A (read only) and B/C share one bank per replication.
      mem_model #(.W(256), .LATENCY(12), .STALL(1'b0)) u_a (
        .clk, .rst, .rd_req_valid(a_rq_v[n][r]), .rd_req_ready(a_rq_r[n][r]), .rd_req_addr(a_rq_a[n][r]),
        .rd_resp_valid(a_rs_v[n][r]), .rd_resp_data(a_rs_d[n][r]),
        .wr_valid(1'b0), .wr_ready(unused_wr_ready), .wr_addr(32'd0), .wr_data('0));
      mem_model #(.W(256), .LATENCY(12), .STALL(1'b1)) u_bc (
        .clk, .rst, .rd_req_valid(b_rq_v[n][r]), .rd_req_ready(b_rq_r[n][r]), .rd_req_addr(b_rq_a[n][r]),
        .rd_resp_valid(b_rs_v[n][r]), .rd_resp_data(b_rs_d[n][r]),
        .wr_valid(c_wv[n][r]), .wr_ready(c_wr[n][r]), .wr_addr(c_wa[n][r]), .wr_data(c_wd[n][r]));
    end

    for (genvar r = 0; r < NRA; r++) begin : g_ram
      mem_model #(.W(64), .LATENCY(6), .STALL(1'b1)) u_t (
        .clk, .rst, .rd_req_valid(ra_rq_v[n][r]), .rd_req_ready(ra_rq_r[n][r]),
        .rd_req_addr(32'(ra_rq_a[n][r])), .rd_resp_valid(ra_rs_v[n][r]), .rd_resp_data(ra_rs_d[n][r]),
        .wr_valid(ra_wv[n][r]), .wr_ready(ra_wr[n][r]), .wr_addr(32'(ra_wa[n][r])), .wr_data(ra_wd[n][r]));
    end
  end

  // ------------------------------------------------------------------ watchdog
  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ mechanism counters
  int n_xchg = 0, n_bp = 0, n_overlap = 0, n_sel_switch = 0, n_drop = 0;
  int n_be_store = 0;
  bench_sel_e last_sel;
  always @(negedge clk) begin
    if (!rst) begin
      if (bench_sel != last_sel) n_sel_switch++;
      last_sel <= bench_sel;
      if (g_node[0].u_node.g_beff[0].xchg_valid && g_node[0].u_node.g_beff[0].xchg_ready) n_xchg++;
      for (int c = 0; c < NC; c++) if (tx_valid[0][c] && !tx_ready[0][c]) n_bp++;
      // fill of one buffer half while the other is drained
      if (g_node[0].u_node.g_ptrans[0].u_send.rd_resp_valid && g_node[0].u_node.g_ptrans[0].u_send.issue)
        n_overlap++;
      if ((g_node[0].u_node.g_ra[0].u_ra.advance & ~g_node[0].u_node.g_ra[0].u_ra.insert) != '0)
        n_drop++;
    end
  end

  // b_eff validation writes
  always @(negedge clk) begin
    for (int n = 0; n < 2; n++)
      for (int k = 0; k < NBE; k++)
        if (be_wr_valid[n][k] && be_wr_ready[n][k]) begin
          n_be_store++;
          chk(be_wr_data[n][k] == {64{8'(BE_LG)}}, $sformatf("b_eff validation node %0d pair %0d", n, k));
        end
  end
  assign be_wr_ready = '1;

  // RandomAccess write monitor: write data XOR read data must be an expected update.
  int ra_expect [longint];
  logic [63:0] ra_reads [2][NRA][$];
  int ra_n_expected [2][NRA];
  int ra_n_writes = 0;
  function automatic longint ra_key(input int n, input int r, input logic [27:0] a, input logic [63:0] v);
    return longint'(v ^ (64'(a) << 32) ^ 64'(n * 8 + r));
  endfunction
  always @(negedge clk) begin
    for (int n = 0; n < 2; n++)
      for (int r = 0; r < NRA; r++) begin
        if (ra_rs_v[n][r]) ra_reads[n][r].push_back(ra_rs_d[n][r]);
        if (ra_wv[n][r] && ra_wr[n][r]) begin
          longint kk;
          kk = ra_key(n, r, ra_wa[n][r], ra_wd[n][r] ^ ra_reads[n][r].pop_front());
          ra_n_writes++;
          if (!ra_expect.exists(kk) || ra_expect[kk] == 0) chk(0, $sformatf("RandomAccess unexpected update n%0d r%0d a=%0d v=%h q=%0d", n, r, ra_wa[n][r], ra_wd[n][r], ra_reads[n][r].size()));
          else begin ra_expect[kk]--; checks++; end
        end
      end
  end

  function automatic logic [63:0] nxt(input logic [63:0] x);
    return {x[62:0], 1'b0} ^ (x[63] ? 64'h7 : 64'h0);
  endfunction

  // ------------------------------------------------------------------ PTRANS data
  function automatic logic [31:0] val_a(int n, int r, int i, int j);
    // A of node n, replication r, element (i, j): a normal float derived from a hash
    logic [31:0] h;
    h = 32'(i * 7919 + j * 104729 + r * 15485863 + n * 32452843) * 32'h9E37_79B1;
    return {h[31], 8'(120 + h[3:0]), h[26:4]};
  endfunction
  function automatic logic [31:0] val_b(int n, int r, int i, int j);
    logic [31:0] h;
    h = 32'(i * 104723 + j * 7907 + r * 49979687 + n * 86028121) * 32'h85EB_CA6B;
    return {h[31], 8'(118 + h[3:0]), h[26:4]};
  endfunction

  task automatic load_ptrans();
    for (int n = 0; n < 2; n++)
      for (int bl = 0; bl < NPB; bl++)
      for (int i = 0; i < BS; i++)
        for (int w = 0; w < BS / CW; w++) begin
          ch_word_t va [NPT], vb [NPT];
          for (int r = 0; r < NPT; r++)
            for (int k = 0; k < CW; k++) begin
              va[r][32*k +: 32] = val_a(n, bl, i, w*CW + k) ^ 32'(r);
              vb[r][32*k +: 32] = val_b(n, bl, i, w*CW + k) ^ 32'(r);
            end
          g_node_mem_write(n, bl * WPB + i * (BS / CW) + w, va, vb);
        end
  endtask

  task automatic g_node_mem_write(int n, int addr, ch_word_t va [NPT], ch_word_t vb [NPT]);
    if (n == 0) begin
      g_node[0].g_ptm[0].u_a.data[AB + addr] = va[0]; g_node[0].g_ptm[0].u_bc.data[BB + addr] = vb[0];
      g_node[0].g_ptm[1].u_a.data[AB + addr] = va[1]; g_node[0].g_ptm[1].u_bc.data[BB + addr] = vb[1];
      g_node[0].g_ptm[2].u_a.data[AB + addr] = va[2]; g_node[0].g_ptm[2].u_bc.data[BB + addr] = vb[2];
      g_node[0].g_ptm[3].u_a.data[AB + addr] = va[3]; g_node[0].g_ptm[3].u_bc.data[BB + addr] = vb[3];
    end else begin
      g_node[1].g_ptm[0].u_a.data[AB + addr] = va[0]; g_node[1].g_ptm[0].u_bc.data[BB + addr] = vb[0];
      g_node[1].g_ptm[1].u_a.data[AB + addr] = va[1]; g_node[1].g_ptm[1].u_bc.data[BB + addr] = vb[1];
      g_node[1].g_ptm[2].u_a.data[AB + addr] = va[2]; g_node[1].g_ptm[2].u_bc.data[BB + addr] = vb[2];
      g_node[1].g_ptm[3].u_a.data[AB + addr] = va[3]; g_node[1].g_ptm[3].u_bc.data[BB + addr] = vb[3];
    end
  endtask

  function automatic ch_word_t c_word(int n, int r, int addr);
    case ({n[0], r[1:0]})
      3'd0: return g_node[0].g_ptm[0].u_bc.peek(longint'(CB + addr));
      3'd1: return g_node[0].g_ptm[1].u_bc.peek(longint'(CB + addr));
      3'd2: return g_node[0].g_ptm[2].u_bc.peek(longint'(CB + addr));
      3'd3: return g_node[0].g_ptm[3].u_bc.peek(longint'(CB + addr));
      3'd4: return g_node[1].g_ptm[0].u_bc.peek(longint'(CB + addr));
      3'd5: return g_node[1].g_ptm[1].u_bc.peek(longint'(CB + addr));
      3'd6: return g_node[1].g_ptm[2].u_bc.peek(longint'(CB + addr));
      default: return g_node[1].g_ptm[3].u_bc.peek(longint'(CB + addr));
    endcase
  endfunction

  // One check per node, replication and block; every value of each block is compared.
  task automatic check_ptrans();
    int bad, bad_blk;
    bad = 0;
    for (int n = 0; n < 2; n++)
      for (int r = 0; r < NPT; r++)
        for (int bl = 0; bl < NPB; bl++) begin
        bad_blk = 0;
        for (int i = 0; i < BS; i++)
          for (int w = 0; w < BS / CW; w++) begin
            ch_word_t got;
            got = c_word(n, r, bl * WPB + i * (BS / CW) + w);
            for (int k = 0; k < CW; k++) begin
              logic [31:0] a, b, e;
              int j;
              j = w * CW + k;
              // C(i, j) of node n = B_n(i, j) + A_m(j, i), m the other node
              a = val_a(1 - n, bl, j, i) ^ 32'(r);
              b = val_b(n, bl, i, j) ^ 32'(r);
              e = r2f(f2r(a) + f2r(b));
              if (got[32*k +: 32] != e) begin
                bad++;
                bad_blk++;
                if (bad < 6) $display("FAIL PTRANS node %0d repl %0d block %0d C(%0d,%0d) = %h expected %h",
                                      n, r, bl, i, j, got[32*k +: 32], e);
              end
            end
          end
        checks++;
        if (bad_blk != 0) failures++;
        end
    if (bad != 0) $display("FAIL PTRANS: %0d wrong values", bad);
  endtask

  // ------------------------------------------------------------------ sequence
  initial begin
    int cyc, model;
    bench_sel = BENCH_BEFF; last_sel = BENCH_BEFF;
    beff_start = 0; ptrans_start = 0; ra_start = 0;
    // RandomAccess seeds: the 8 replications all walk the same sequence, each generator
    // its own RA_NPR numbers; expectations per replication are computed here.
    begin
      logic [63:0] x, g [NRNG];
      x = 64'h1;
      for (int i = 0; i < 5; i++) x = nxt(x);
      for (int k = 0; k < NRNG; k++) begin
        g[k] = x;
        for (int i = 0; i < RA_NPR; i++) begin
          logic [63:0] a;
          int owner;
          a = x & ((64'd1 << RA_TL) - 1);
          owner = int'(a >> RA_LL);
          ra_expect[ra_key(owner / NRA, owner % NRA, 28'(a & ((64'd1 << RA_LL) - 1)), x)]++;
          ra_n_expected[owner / NRA][owner % NRA]++;
          x = nxt(x);
        end
      end
      for (int n = 0; n < 2; n++) for (int r = 0; r < NRA; r++) for (int k = 0; k < NRNG; k++)
        seeds[n][r][k] = g[k];
    end
    load_ptrans();
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (4) @(negedge clk);

    // ---- b_eff
    beff_start = 1; @(negedge clk); beff_start = 0;
    cyc = 1;
    while (!(beff_done[0] || beff_done[1]) || beff_busy != '0) begin @(negedge clk); cyc++; end
    model = ((1 << BE_LG) / 64) * BE_N + BE_N * LAT;
    $display("b_eff: %0d cycles for %0d messages of %0d B (model %0d)", cyc, BE_N, 1 << BE_LG, model);
    chk(cyc >= model && cyc <= model + BE_N * 8 + 10, $sformatf("b_eff cycles %0d vs model %0d", cyc, model));
    chk(n_be_store == 2 * NBE, "b_eff validation writes");

    // ---- switch to PTRANS
    @(negedge clk); bench_sel = BENCH_PTRANS;
    @(negedge clk);
    ptrans_start = 1; @(negedge clk); ptrans_start = 0;
    cyc = 1;
    while (ptrans_busy != '0) begin @(negedge clk); cyc++; end
    $display("PTRANS: %0d cycles for %0d blocks of %0dx%0d per replication (%0d words each)", cyc, NPB, BS, BS, WPB);
    // One block fill, then the receive side at the rate its B/C memory allows: read and
    // write ready are each high 3 cycles in 4, which leaves about 0.7 words per cycle.
    chk(cyc >= (NPB + 1) * WPB && cyc <= WPB + (NPB * WPB * 10) / 7 + 2000, $sformatf("PTRANS cycles %0d", cyc));
    check_ptrans();

    // ---- RandomAccess
    ra_start = 1; @(negedge clk); ra_start = 0;
    cyc = 1;
    while (ra_busy != '0) begin @(negedge clk); cyc++; end
    repeat (2) @(negedge clk);
    $display("RandomAccess: %0d cycles, %0d writes", cyc, ra_n_writes);
    for (int n = 0; n < 2; n++) for (int r = 0; r < NRA; r++)
      chk(ra_updates[n][r] == ra_n_expected[n][r],
          $sformatf("RA updates node %0d repl %0d: %0d expected %0d", n, r, ra_updates[n][r], ra_n_expected[n][r]));
    @(negedge clk); bench_sel = BENCH_BEFF;
    @(negedge clk);

    // ---- mechanisms
    $display("mechanisms: exchange %0d, back-pressure %0d, fill/drain overlap %0d, select switches %0d, RNG stalls %0d, dropped numbers %0d",
             n_xchg, n_bp, n_overlap, n_sel_switch, ra_stalls[0][0], n_drop);
    chk(n_xchg > 0, "b_eff exchange channel never used");
    chk(n_bp > 0, "channel back-pressure never happened");
    chk(n_overlap > 0, "PTRANS fill/drain overlap never happened");
    chk(n_sel_switch >= 2, "benchmark select never switched");
    chk(ra_stalls[0] != '0, "RandomAccess generator stall never happened");
    chk(n_drop > 0, "RandomAccess out-of-range drop never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
