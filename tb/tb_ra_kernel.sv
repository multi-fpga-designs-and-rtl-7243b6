// Testbench of ra_kernel with 4 generators at distance 2 (the arrangement drawn in the
// paper's figure), a 1024-word local table and 4 replications' worth of address space.
// The testbench generates the same random sequence itself, keeps the numbers that
// fall into this replication, and checks that every write made by the kernel is one of
// those updates (write data XOR read data gives the number), each exactly once, that
// the final table differs from the exact result in at most 1 % of the words (the
// benchmark's error rule), and that generator stalls occurred.
module tb_ra_kernel;
  localparam int RCL = 2, NR = 4, DIST = 2, AW = 10, NPR = 300;
  localparam int TL = 12, LL = 10, REPL = 2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic start;
  logic [31:0] num_per_rng, repl_index, updates, rng_stalls;
  logic [5:0] total_size_log, local_size_log;
  logic [NR-1:0][63:0] seeds;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready, busy, done;
  logic [AW-1:0] rd_req_addr, wr_addr;
  logic [63:0] rd_resp_data, wr_data;
  int checks = 0, failures = 0;

  ra_kernel #(.RNG_COUNT_LOG(RCL), .RNG_DISTANCE(DIST), .LOCAL_ADDR_W(AW)) dut (.*);

  mem_model #(.W(64), .LATENCY(4), .STALL(1'b1)) mem (
    .clk, .rst, .rd_req_valid, .rd_req_ready, .rd_req_addr(32'(rd_req_addr)),
    .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr(32'(wr_addr)), .wr_data);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] nxt(input logic [63:0] x);
    return {x[62:0], 1'b0} ^ (x[63] ? 64'h7 : 64'h0);
  endfunction

  int expect_cnt [longint];     // key: {addr, number} hash -> remaining count
  logic [63:0] ref_tab [1 << AW];
  logic [63:0] reads_q[$];
  int n_inrange = 0, n_writes = 0;

  function automatic longint key(input logic [AW-1:0] a, input logic [63:0] v);
    return longint'(v ^ (64'(a) << 50) ^ 64'(a));
  endfunction

  // Sampled at the falling edge: the values then are the ones the next rising edge takes.
  always @(negedge clk) begin
    if (rd_resp_valid) reads_q.push_back(rd_resp_data);
    if (wr_valid && wr_ready) begin
      logic [63:0] v;
      longint kk;
      v = wr_data ^ reads_q.pop_front();
      kk = key(wr_addr, v);
      checks++;
      if (!expect_cnt.exists(kk) || expect_cnt[kk] == 0) begin
        failures++;
        if (failures < 8) $display("FAIL unexpected update addr %0d value %h", wr_addr, v);
      end else expect_cnt[kk]--;
      n_writes++;
    end
  end

  initial begin
    logic [63:0] x;
    int cyc, errs;
    start = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    // Seeds: generator k starts NPR steps after generator k-1.
    x = 64'h1;
    for (int i = 0; i < 37; i++) x = nxt(x);
    for (int k = 0; k < (1 << AW); k++) ref_tab[k] = '0;
    for (int k = 0; k < NR; k++) begin
      seeds[k] = x;
      for (int i = 0; i < NPR; i++) begin
        logic [63:0] a;
        a = x & ((64'd1 << TL) - 1);
        if ((a >> LL) == 64'(REPL)) begin
          expect_cnt[key(AW'(a), x)]++;
          ref_tab[AW'(a)] ^= x;
          n_inrange++;
        end
        x = nxt(x);
      end
    end
    @(negedge clk);
    num_per_rng = NPR; total_size_log = 6'(TL); local_size_log = 6'(LL); repl_index = REPL; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (updates != n_inrange || n_writes != n_inrange) begin
      failures++; $display("FAIL updates %0d writes %0d expected %0d", updates, n_writes, n_inrange);
    end
    errs = 0;
    for (int k = 0; k < (1 << AW); k++) if (mem.peek(longint'(k)) != ref_tab[k]) errs++;
    checks++;
    if (errs * 100 > (1 << AW)) begin failures++; $display("FAIL %0d table errors", errs); end
    checks++;
    if (rng_stalls == 0) begin failures++; $display("FAIL no generator stall"); end
    checks++;
    if (cyc > 4 * NPR + 200) begin failures++; $display("FAIL cycles %0d", cyc); end
    $display("in range %0d, stalls %0d, table errors %0d, cycles %0d", n_inrange, rng_stalls, errs, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
