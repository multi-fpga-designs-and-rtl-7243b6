// Testbench of ra_rng: loads seeds and compares 2000 steps, with random pauses, against
// the HPC Challenge recurrence computed here with arithmetic (multiply by two modulo
// 2**64, then XOR 7 when the top bit was set).
module tb_ra_rng;
  logic clk = 0;
  always #5 clk = ~clk;
  logic load, advance;
  logic [63:0] seed, value, model;
  int checks = 0, failures = 0;

  ra_rng dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; advance = 0; seed = 0;
    for (int s = 0; s < 3; s++) begin
      @(negedge clk);
      seed = {$urandom, $urandom}; load = 1; model = seed;
      @(negedge clk); load = 0;
      for (int i = 0; i < 2000; i++) begin
        checks++;
        if (value != model) begin
          failures++;
          if (failures < 8) $display("FAIL step %0d: %h expected %h", i, value, model);
        end
        advance = ($urandom % 4 != 0);
        @(negedge clk);
        if (advance) model = (model * 2) ^ ((model >= 64'h8000_0000_0000_0000) ? 64'd7 : 64'd0);
      end
      advance = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
