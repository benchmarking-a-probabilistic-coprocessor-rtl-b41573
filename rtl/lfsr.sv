// lfsr: pseudo-random number source of the emulated N-bit RNG block.
//
// The FPGA emulation replaces the stochastic-MTJ p-bit array by linear
// feedback shift registers (LFSRs), one per random operand. This is a
// Fibonacci LFSR of W bits that shifts towards the MSB and feeds the XOR of
// its tap bits into bit 0; the taps give a maximal period of 2^W-1 for the
// widths listed in pc_pkg::lfsr_mask. Each clock with en high produces a
// new W-bit word on q (all W bits are read as one random number, as in the
// figures of the paper, which draw W-stage registers with XOR feedback).
// Reset loads SEED (a zero seed is replaced by 1, since zero is a lock-up
// state). The paper does not give tap positions or seeds: both are choices
// of this design.
module lfsr
  import pc_pkg::*;
#(
  parameter int          W    = 18,
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  output logic [W-1:0] q
);
  localparam logic [W-1:0] MASK  = W'(lfsr_mask(W));
  localparam logic [W-1:0] SEED0 = (W'(SEED) == '0) ? W'(1) : W'(SEED);

  always_ff @(posedge clk) begin
    if (rst)     q <= SEED0;
    else if (en) q <= {q[W-2:0], ^(q & MASK)};
  end
endmodule
