// mcd_rng: uniform pseudo-random number generator of one MCD layer.
//
// The MCD layer compares a fresh uniform random number against the keep rate
// for every element it processes. Which generator produces the numbers is
// left open by the method; this design uses the simplest hardware generator,
// a 16-bit maximal-length Galois LFSR (period 2**16 - 1, all non-zero values
// appear once per period, so the numbers are uniform over 1..65535).
//
// Interface: `rand_o` shows the current number; when `advance` is high at a
// rising clock edge the LFSR steps once, so the next element sees the next
// number. A synchronous active-low reset reloads SEED, which must be
// non-zero. Timing: the output is a register, zero combinational depth.
module mcd_rng
  import mcd_pkg::*;
#(
  parameter logic [15:0] SEED = BASE_SEED
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        advance,
  output logic [15:0] rand_o
);

  logic [15:0] state;

  always_ff @(posedge clk) begin
    if (!rst_n)
      state <= SEED;
    else if (advance)
      state <= (state >> 1) ^ (state[0] ? LFSR_TAPS : 16'h0000);
  end

  assign rand_o = state;

  initial begin
    assert (SEED != 16'h0000) else $error("mcd_rng: SEED must be non-zero");
  end

endmodule
