// Testbench of beff_send: runs several message sizes and repetition counts with random
// channel back-pressure, collects every word per channel, hands back a fresh chunk
// over the exchange channel after each message, and checks word counts, contents and
// (with ready held high) the cycle count of ceil(L/64 B) cycles per message.
module tb_beff_send;
  localparam int CW = 32;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic start;
  logic [4:0] msg_size_log;
  logic [31:0] num_messages;
  logic [1:0] tx_valid, tx_ready;
  logic [1:0][CW*8-1:0] tx_data;
  logic xchg_valid, xchg_ready;
  logic [2*CW*8-1:0] xchg_data;
  logic busy, done;
  int checks = 0, failures = 0;
  bit random_ready;

  beff_send #(.CHANNEL_WIDTH(CW)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) tx_ready <= random_ready ? 2'($urandom) : 2'b11;

  // Run one test: returns the cycles from start to done.
  task automatic run(input int lgv, input int n, input bit rr);
    int exp_chunks, cyc, msg;
    int cnt[2];
    logic [2*CW*8-1:0] cur;
    exp_chunks = (lgv <= 6) ? 1 : (1 << (lgv - 6));
    random_ready = rr;
    cur = {(2*CW){8'(lgv)}};
    @(negedge clk); msg_size_log = 5'(lgv); num_messages = n; start = 1;
    @(negedge clk); start = 0;
    cyc = 1; msg = 0;
    cnt[0] = 0; cnt[1] = 0;
    while (!done) begin
      @(posedge clk);
      for (int c = 0; c < 2; c++)
        if (tx_valid[c] && tx_ready[c]) begin
          cnt[c]++;
          chk(tx_data[c] == cur[c*CW*8 +: CW*8], $sformatf("data lg=%0d ch=%0d", lgv, c));
        end
      if (xchg_valid && xchg_ready) begin
        cur = xchg_data;
      end
      #1;
      cyc++;
    end
    chk(cnt[0] == exp_chunks * n && cnt[1] == exp_chunks * n,
        $sformatf("count lg=%0d n=%0d got %0d/%0d", lgv, n, cnt[0], cnt[1]));
    if (!rr) chk(cyc <= (exp_chunks + 3) * n + 3, $sformatf("cycles lg=%0d n=%0d: %0d", lgv, n, cyc));
  endtask

  // Exchange channel source: offers a new random chunk a few cycles after each request.
  always @(posedge clk) begin
    if (xchg_valid && xchg_ready) xchg_valid <= 1'b0;
    else if (xchg_ready && !xchg_valid && ($urandom % 3 == 0)) begin
      xchg_valid <= 1'b1;
      for (int k = 0; k < 2*CW*8/32; k++) xchg_data[k*32 +: 32] <= $urandom;
    end
  end

  initial begin
    start = 0; msg_size_log = 0; num_messages = 0; xchg_valid = 0; xchg_data = '0; random_ready = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(0, 3, 0);
    run(6, 2, 0);
    run(10, 4, 0);
    run(12, 3, 1);
    run(3, 5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
