// Behavioural model of a global memory port: a read request port (valid/ready/address)
// with in-order responses LATENCY cycles later, and a write port (valid/ready/address/
// data). Contents live in an associative array, so large address spaces cost only what
// is touched; unwritten words read as zero. When STALL is set, ready is withheld at
// random. Not synthesizable.
module mem_model #(
  parameter int unsigned W       = 256,
  parameter int unsigned LATENCY = 8,
  parameter bit          STALL   = 1'b0
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         rd_req_valid,
  output logic         rd_req_ready,
  input  logic [31:0]  rd_req_addr,
  output logic         rd_resp_valid,
  output logic [W-1:0] rd_resp_data,
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [31:0]  wr_addr,
  input  logic [W-1:0] wr_data
);
  logic [W-1:0] data [longint];
  logic [W-1:0] pipe_d [LATENCY];
  logic         pipe_v [LATENCY];
  int unsigned  reads = 0, writes = 0;

  function automatic logic [W-1:0] peek(input longint a);
    return data.exists(a) ? data[a] : '0;
  endfunction

  assign rd_resp_valid = pipe_v[LATENCY-1];
  assign rd_resp_data  = pipe_d[LATENCY-1];

  always @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < LATENCY; i++) begin pipe_v[i] <= 1'b0; pipe_d[i] <= '0; end
      rd_req_ready <= 1'b0;
      wr_ready     <= 1'b0;
    end else begin
      for (int i = LATENCY - 1; i > 0; i--) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
      pipe_v[0] <= rd_req_valid && rd_req_ready;
      pipe_d[0] <= peek(longint'(rd_req_addr));
      if (rd_req_valid && rd_req_ready) reads++;
      if (wr_valid && wr_ready) begin
        data[longint'(wr_addr)] = wr_data;
        writes++;
      end
      rd_req_ready <= STALL ? ($urandom % 4 != 0) : 1'b1;
      wr_ready     <= STALL ? ($urandom % 4 != 0) : 1'b1;
    end
  end
endmodule
