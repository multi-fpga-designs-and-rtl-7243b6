// Pseudo-random number generator of the RandomAccess kernel.
//
// It produces the HPC Challenge RandomAccess sequence x' = (x << 1) XOR (x[63] ? 7 : 0)
// over 64-bit values; the paper keeps the sequence of the original benchmark and only
// replicates the generator, so each instance is loaded with a different seed and walks
// its own part of the sequence. The recurrence is taken from the HPC Challenge
// specification. Interface: load (with seed) sets the value; advance steps it; value is
// the current number. Timing: one new number per cycle while advance is high.
module ra_rng (
  input  logic        clk,
  input  logic        load,
  input  logic [63:0] seed,
  input  logic        advance,
  output logic [63:0] value
);
  localparam logic [63:0] POLY = 64'h7;

  always_ff @(posedge clk) begin
    if (load)         value <= seed;
    else if (advance) value <= {value[62:0], 1'b0} ^ (value[63] ? POLY : 64'd0);
  end
endmodule
