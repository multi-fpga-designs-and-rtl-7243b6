// Testbench of ptrans_transpose_send at BLOCK_SIZE 32, CHANNEL_WIDTH 8: three blocks of
// random values are read from a memory model; every channel word is compared with the
// transposed block computed here. Run once with random memory and channel stalls and
// once without, where the cycle count must stay near one word per cycle.
module tb_ptrans_transpose_send;
  localparam int BS = 32, CW = 8, WPR = BS / CW, WPB = BS * WPR, NB = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic start;
  logic [31:0] num_blocks, a_base;
  logic rd_req_valid, rd_req_ready, rd_resp_valid;
  logic [31:0] rd_req_addr;
  logic [CW*32-1:0] rd_resp_data, tx_data;
  logic tx_valid, tx_ready, busy, done;
  logic wr_ready_unused;
  bit stall;
  int checks = 0, failures = 0;

  ptrans_transpose_send #(.BLOCK_SIZE(BS), .CHANNEL_WIDTH(CW)) dut (.*);

  mem_model #(.W(CW*32), .LATENCY(6), .STALL(1'b0)) mem (
    .clk, .rst, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid(1'b0), .wr_ready(wr_ready_unused), .wr_addr(32'd0), .wr_data('0));

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] A [NB][BS][BS];
  int out_cnt;

  // Channel sink: checks each accepted word against the transposed reference.
  always @(posedge clk) begin
    if (!rst && tx_valid && tx_ready) begin
      int b, o, r, c;
      logic [CW*32-1:0] e;
      b = out_cnt / WPB; o = out_cnt % WPB; r = o / WPR; c = o % WPR;
      for (int k = 0; k < CW; k++) e[32*k +: 32] = A[b][c*CW + k][r];
      checks++;
      if (tx_data != e) begin
        failures++;
        if (failures < 8) $display("FAIL word %0d: %h expected %h", out_cnt, tx_data, e);
      end
      out_cnt++;
    end
    tx_ready <= stall ? ($urandom % 3 != 0) : 1'b1;
  end

  task automatic run(input bit st, input int base);
    int cyc;
    stall = st; out_cnt = 0;
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < BS; i++)
        for (int j = 0; j < BS; j++) A[b][i][j] = $urandom;
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < BS; i++)
        for (int w = 0; w < WPR; w++) begin
          logic [CW*32-1:0] v;
          for (int k = 0; k < CW; k++) v[32*k +: 32] = A[b][i][w*CW + k];
          mem.data[longint'(base + b*WPB + i*WPR + w)] = v;
        end
    @(negedge clk); num_blocks = NB; a_base = base; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (out_cnt != NB * WPB) begin failures++; $display("FAIL count %0d", out_cnt); end
    if (!st) begin
      checks++;
      // One block fill before the first word, then one word per cycle.
      if (cyc > (NB + 1) * WPB + 40) begin failures++; $display("FAIL cycles %0d", cyc); end
    end
  endtask

  initial begin
    start = 0; num_blocks = 0; a_base = 0; tx_ready = 0; stall = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(1, 1000);
    run(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
