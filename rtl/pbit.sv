// pbit: digitally emulated tunable p-bit.
//
// A probabilistic bit whose probability of being 1 is set by its input, as
// in the paper's Bayesian-network emulation: an RW-bit LFSR word is compared
// (">") with a threshold that the activation-function look-up returns for
// the p-bit's input. The p-bit is 1 (bipolar +1) when thr > rnd, so
// P(1) = (thr - 1) / (2^RW - 1) for 1 <= thr <= 2^RW, 0 for thr = 0 and
// 1 for thr = 2^RW (the threshold has one bit more than the LFSR for this).
// Timing: the output register updates on every clock with en high, from the
// threshold present in the same clock (one clock of latency).
// The threshold encoding and widths are this design's choices.
module pbit #(
  parameter int          RW   = 16,
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic [RW:0] thr,
  output logic        m         // 1 = +1, 0 = -1
);
  logic [RW-1:0] rnd;
  lfsr #(.W(RW), .SEED(SEED)) u_rng (.clk, .rst, .en, .q(rnd));

  always_ff @(posedge clk) begin
    if (rst)     m <= 1'b0;
    else if (en) m <= (thr > {1'b0, rnd});
  end
endmodule
