// Behavioural model of one direction of an external serial channel (the board's
// channel IP): a word written on the input side appears on the output side LATENCY
// cycles later, at one word per cycle. The model buffers up to DEPTH words and lowers
// in_ready when full, so it can both delay and apply back-pressure. Not synthesizable.
module ext_channel_model #(
  parameter int unsigned W       = 256,
  parameter int unsigned LATENCY = 82,    // 520 ns at 156.25 MHz is about 81.25 cycles
  parameter int unsigned DEPTH   = 128
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  logic [W-1:0]  q_data[$];
  longint        q_time[$];
  longint        now;

  always_comb begin
    in_ready  = (q_data.size() < DEPTH);
    out_valid = (q_data.size() > 0) && (q_time[0] + longint'(LATENCY) <= now);
    out_data  = (q_data.size() > 0) ? q_data[0] : '0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      now <= 0;
      q_data.delete();
      q_time.delete();
    end else begin
      now <= now + 1;
      if (out_valid && out_ready) begin
        void'(q_data.pop_front());
        void'(q_time.pop_front());
      end
      if (in_valid && in_ready) begin
        q_data.push_back(in_data);
        q_time.push_back(now);
      end
    end
  end
endmodule
