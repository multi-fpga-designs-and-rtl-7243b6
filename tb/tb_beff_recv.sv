// Testbench of beff_recv: feeds num_messages messages of random words on both channels
// with random valid gaps, checks that the exchange channel gets the last word of each
// channel after every message but the last, that the validation write gets it after
// the last one, and that no word is taken beyond a message's chunk count.
module tb_beff_recv;
  localparam int CW = 32;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic start;
  logic [4:0] msg_size_log;
  logic [31:0] num_messages;
  logic [1:0] rx_valid, rx_ready;
  logic [1:0][CW*8-1:0] rx_data;
  logic xchg_valid, xchg_ready;
  logic [2*CW*8-1:0] xchg_data;
  logic wr_valid, wr_ready;
  logic [2*CW*8-1:0] wr_data;
  logic busy, done;
  int checks = 0, failures = 0;

  beff_recv #(.CHANNEL_WIDTH(CW)) dut (.*);

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

  // Per-channel sources: words are numbered; word k of channel c carries {c, k} pattern.
  int sent[2];
  int total_words;
  function automatic logic [CW*8-1:0] word_of(int c, int k);
    return {(CW*8/32){32'(k * 2 + c) ^ 32'hA5A5_0000}};
  endfunction
  // Source and acceptance count in one clocked process, so no ordering race exists.
  always @(posedge clk) begin
    for (int c = 0; c < 2; c++) begin
      int k;
      k = sent[c];
      if (rx_valid[c] && rx_ready[c]) k++;
      sent[c] <= k;
      if (k < total_words && ($urandom % 4 != 0)) begin
        rx_valid[c] <= 1'b1;
        rx_data[c]  <= word_of(c, k);
      end else rx_valid[c] <= 1'b0;
    end
  end

  // Monitor: all handshakes are sampled at the clock edge where they take effect.
  int chunks, nmsg, msg;
  always @(posedge clk) begin
    if (!rst && busy) begin
      chk(sent[0] <= chunks * (msg + 1) && sent[1] <= chunks * (msg + 1), "overrun");
      if (xchg_valid && xchg_ready) begin
        chk(msg < nmsg - 1, "exchange after last message");
        chk(xchg_data == {word_of(1, chunks*(msg+1)-1), word_of(0, chunks*(msg+1)-1)},
            $sformatf("exchange data chunks %0d msg %0d got %h %h", chunks, msg, xchg_data[CW*8 +: 32], xchg_data[31:0]));
        msg++;
      end
      if (wr_valid && wr_ready) begin
        chk(msg == nmsg - 1, "store message index");
        chk(wr_data == {word_of(1, chunks*nmsg-1), word_of(0, chunks*nmsg-1)}, "store data");
      end
    end
  end
  always @(negedge clk) begin
    xchg_ready <= ($urandom % 2 == 0);
    wr_ready   <= ($urandom % 2 == 0);
  end

  task automatic run(input int lgv, input int n);
    chunks = (lgv <= 6) ? 1 : (1 << (lgv - 6));
    nmsg = n; msg = 0;
    sent[0] = 0; sent[1] = 0; total_words = chunks * n;
    @(negedge clk); msg_size_log = 5'(lgv); num_messages = n; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    chk(sent[0] == total_words && sent[1] == total_words, "all words taken");
  endtask

  initial begin
    start = 0; msg_size_log = 0; num_messages = 0; rx_valid = 0; rx_data = '0;
    xchg_ready = 0; wr_ready = 0; sent[0] = 0; sent[1] = 0; total_words = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(0, 3);
    run(7, 4);
    run(11, 2);
    run(4, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
