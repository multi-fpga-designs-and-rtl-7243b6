// Testbench of ptrans_recv_add at BLOCK_SIZE 16, CHANNEL_WIDTH 8: random transposed-A
// words arrive on the channel with random gaps, B sits in a stalling memory model, and
// every word of C written back is compared with B + A^T computed in double precision
// and rounded to single precision. A second run without stalls checks one word per
// cycle.
module tb_ptrans_recv_add;
  import fp32_ref_pkg::*;
  localparam int BS = 16, CW = 8, WPB = BS * BS / CW, NB = 3;
  localparam int BB = 4096, CB = 8192;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic start;
  logic [31:0] num_blocks, b_base, c_base;
  logic rx_valid, rx_ready;
  logic [CW*32-1:0] rx_data;
  logic rd_req_valid, rd_req_ready, rd_resp_valid;
  logic [31:0] rd_req_addr;
  logic [CW*32-1:0] rd_resp_data;
  logic wr_valid, wr_ready;
  logic [31:0] wr_addr;
  logic [CW*32-1:0] wr_data;
  logic busy, done;
  bit gaps;
  int checks = 0, failures = 0;

  ptrans_recv_add #(.BLOCK_SIZE(BS), .CHANNEL_WIDTH(CW)) dut (.*);

  mem_model #(.W(CW*32), .LATENCY(10), .STALL(1'b1)) mem (
    .clk, .rst, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [CW*32-1:0] at_words [NB*WPB];
  int sent;

  function automatic logic [31:0] rnd_float();
    return {1'($urandom), 8'(115 + ($urandom % 20)), 23'($urandom)};
  endfunction

  // Channel source.
  always @(posedge clk) begin
    int k;
    k = sent;
    if (rx_valid && rx_ready) k++;
    sent <= k;
    if (!rst && busy && k < NB * WPB && (!gaps || $urandom % 3 != 0)) begin
      rx_valid <= 1'b1;
      rx_data  <= at_words[k];
    end else rx_valid <= 1'b0;
  end

  task automatic run(input bit g);
    int cyc;
    gaps = g; sent = 0;
    for (int w = 0; w < NB * WPB; w++) begin
      logic [CW*32-1:0] bw;
      for (int k = 0; k < CW; k++) begin
        at_words[w][32*k +: 32] = rnd_float();
        bw[32*k +: 32] = rnd_float();
      end
      mem.data[longint'(BB + w)] = bw;
    end
    @(negedge clk); num_blocks = NB; b_base = BB; c_base = CB; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    for (int w = 0; w < NB * WPB; w++) begin
      logic [CW*32-1:0] bw, cw;
      bw = mem.peek(BB + w);
      cw = mem.peek(CB + w);
      for (int k = 0; k < CW; k++) begin
        logic [31:0] e;
        e = r2f(f2r(at_words[w][32*k +: 32]) + f2r(bw[32*k +: 32]));
        checks++;
        if (cw[32*k +: 32] != e) begin
          failures++;
          if (failures < 8) $display("FAIL word %0d lane %0d: %h expected %h", w, k, cw[32*k +: 32], e);
        end
      end
    end
    checks++;
    // Memory ready is high three cycles in four, so allow for that.
    if (!g && cyc > 2 * NB * WPB + 40) begin failures++; $display("FAIL cycles %0d", cyc); end
  endtask

  initial begin
    start = 0; num_blocks = 0; b_base = 0; c_base = 0; rx_valid = 0; rx_data = '0; sent = 0; gaps = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(1);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
