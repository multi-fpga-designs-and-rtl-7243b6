// One replication of the scalable RandomAccess kernel.
//
// RNG_COUNT = 2**RNG_COUNT_LOG generators each walk their own part of the random
// sequence (num_per_rng numbers each, seeded by the host). A number is usable only if
// the table address derived from it belongs to this replication: address = number mod
// 2**total_size_log, owner = address >> local_size_log, usable if owner == repl_index.
// Unusable numbers are dropped and the generator moves on. Usable numbers are put into
// a shift register of RNG_COUNT*RNG_DISTANCE cells, each with a valid flag. Generator k
// writes cell k*RNG_DISTANCE counted from the far end; if that cell already holds a
// valid number after the shift, the generator stalls until the cell is free. The cell
// at the near end feeds the update logic, so the parallel generators are serialised
// into at most one update per cycle.
//
// The update is a read-xor-write of the 64-bit table word in global memory,
// table[address] ^= number. As on the paper's Stratix 10 board, a single pipeline is
// used and the dependency between a pending write and a later read of the same
// address is not tracked; the benchmark accepts the resulting rare errors. Up to
// MAX_PENDING updates are in flight in an in-order queue.
//
// Interface: start pulse with the run parameters and seeds (one per generator);
// a read port (request valid/ready/address, in-order response valid/data, always
// accepted) and a write port (valid/ready/address/data) to the table; busy, a done
// pulse after the last write, and the number of updates made.
// Timing: the whole shift register holds while its output waits for the read port.
// The shift direction, insertion points and queue depth follow Fig. 9 of the paper as
// far as it is printed; the rest is this design's choice.
module ra_kernel #(
  parameter int unsigned RNG_COUNT_LOG  = 5,
  parameter int unsigned RNG_DISTANCE   = 5,
  parameter int unsigned LOCAL_ADDR_W   = 28,   // largest local table: 2**28 words
  parameter int unsigned MAX_PENDING    = 16
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          start,
  input  logic [31:0]                   num_per_rng,
  input  logic [5:0]                    total_size_log,
  input  logic [5:0]                    local_size_log,
  input  logic [31:0]                   repl_index,
  input  logic [(2**RNG_COUNT_LOG)-1:0][63:0] seeds,
  // table read port
  output logic                          rd_req_valid,
  input  logic                          rd_req_ready,
  output logic [LOCAL_ADDR_W-1:0]       rd_req_addr,
  input  logic                          rd_resp_valid,
  input  logic [63:0]                   rd_resp_data,
  // table write port
  output logic                          wr_valid,
  input  logic                          wr_ready,
  output logic [LOCAL_ADDR_W-1:0]       wr_addr,
  output logic [63:0]                   wr_data,
  output logic                          busy,
  output logic                          done,
  output logic [31:0]                   updates,
  output logic [31:0]                   rng_stalls
);

  localparam int unsigned NRNG = 2 ** RNG_COUNT_LOG;
  localparam int unsigned LEN  = NRNG * RNG_DISTANCE;
  localparam int unsigned PL   = $clog2(MAX_PENDING);

  logic running;
  logic [NRNG-1:0][63:0] rnd;
  logic [NRNG-1:0][31:0] left;          // numbers still to produce per generator
  logic [NRNG-1:0]       active, in_range, insert, advance;

  logic [LEN-1:0][63:0] sr_data;
  logic [LEN-1:0]       sr_valid;
  logic [LEN-1:0][63:0] sh_data;        // shift register after this cycle's shift
  logic [LEN-1:0]       sh_valid;
  logic                 hold;           // output cell waits for the read port

  // Pending update queue.
  logic [MAX_PENDING-1:0][63:0]             q_rnd, q_val;
  logic [MAX_PENDING-1:0][LOCAL_ADDR_W-1:0] q_addr;
  logic [PL-1:0] q_alloc, q_resp, q_wr;
  logic [PL:0]   q_count, q_filled;        // entries allocated, entries with read data

  function automatic logic [63:0] addr_of(input logic [63:0] v, input logic [5:0] tl);
    return v & ((64'd1 << tl) - 64'd1);
  endfunction

  // ---------------- generators and shift register ----------------
  assign rd_req_valid = running && sr_valid[0] && (32'(q_count) < MAX_PENDING);
  // The table word within this replication's part: the low local_size_log bits.
  assign rd_req_addr  = LOCAL_ADDR_W'(addr_of(sr_data[0], local_size_log));
  assign hold         = sr_valid[0] && !(rd_req_valid && rd_req_ready);

  always_comb begin
    for (int p = 0; p < LEN; p++) begin
      if (hold) begin
        sh_data[p]  = sr_data[p];
        sh_valid[p] = sr_valid[p];
      end else if (p == LEN - 1) begin
        sh_data[p]  = '0;
        sh_valid[p] = 1'b0;
      end else begin
        sh_data[p]  = sr_data[p+1];
        sh_valid[p] = sr_valid[p+1];
      end
    end
    for (int k = 0; k < NRNG; k++) begin
      active[k]   = running && (left[k] != 32'd0);
      in_range[k] = (32'(addr_of(rnd[k], total_size_log) >> local_size_log) == repl_index);
      insert[k]   = active[k] && in_range[k] && !sh_valid[LEN-1-k*RNG_DISTANCE];
      // Advance unless the number is usable but its cell is taken (a stall).
      advance[k]  = active[k] && (!in_range[k] || insert[k]);
    end
  end

  for (genvar k = 0; k < NRNG; k++) begin : g_rng
    ra_rng u_rng (.clk, .load(start && !running), .seed(seeds[k]), .advance(advance[k]),
                  .value(rnd[k]));
  end

  // ---------------- update: read, xor, write ----------------
  assign wr_valid = (q_filled != '0);
  assign wr_addr  = q_addr[q_wr];
  assign wr_data  = q_val[q_wr];
  assign busy     = running;

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      running    <= 1'b0;
      left       <= '0;
      sr_valid   <= '0;
      sr_data    <= '0;
      q_alloc    <= '0;
      q_resp     <= '0;
      q_wr       <= '0;
      q_count    <= '0;
      q_filled   <= '0;
      updates    <= '0;
      rng_stalls <= '0;
    end else if (!running) begin
      if (start) begin
        running    <= 1'b1;
        left       <= {NRNG{num_per_rng}};
        sr_valid   <= '0;
        updates    <= '0;
        rng_stalls <= '0;
      end
    end else begin
      // shift and insert
      for (int p = 0; p < LEN; p++) begin
        sr_data[p]  <= sh_data[p];
        sr_valid[p] <= sh_valid[p];
      end
      for (int k = 0; k < NRNG; k++) begin
        if (insert[k]) begin
          sr_data[LEN-1-k*RNG_DISTANCE]  <= rnd[k];
          sr_valid[LEN-1-k*RNG_DISTANCE] <= 1'b1;
        end
        if (advance[k]) left[k] <= left[k] - 32'd1;
      end
      rng_stalls <= rng_stalls + 32'($countones(active & ~advance));
      // queue
      if (rd_req_valid && rd_req_ready) begin
        q_rnd[q_alloc]  <= sr_data[0];
        q_addr[q_alloc] <= rd_req_addr;
        q_alloc         <= q_alloc + 1'b1;
      end
      if (rd_resp_valid) begin
        q_val[q_resp] <= rd_resp_data ^ q_rnd[q_resp];
        q_resp        <= q_resp + 1'b1;
      end
      if (wr_valid && wr_ready) begin
        q_wr    <= q_wr + 1'b1;
        updates <= updates + 32'd1;
      end
      q_count  <= q_count + (PL+1)'(rd_req_valid && rd_req_ready) - (PL+1)'(wr_valid && wr_ready);
      q_filled <= q_filled + (PL+1)'(rd_resp_valid) - (PL+1)'(wr_valid && wr_ready);
      // finished when every generator is exhausted and everything has drained
      if (active == '0 && sr_valid == '0 && q_count == '0) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  a_resp_has_entry: assert property (@(posedge clk) disable iff (rst)
    rd_resp_valid |-> q_count > q_filled);
  a_queue_bound: assert property (@(posedge clk) disable iff (rst)
    32'(q_count) <= MAX_PENDING);

endmodule
