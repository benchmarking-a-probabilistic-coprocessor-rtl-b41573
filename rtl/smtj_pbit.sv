// smtj_pbit: behavioural model (not synthesizable) of the 3-transistor /
// 1-stochastic-MTJ p-bit that an integrated p-computer would use as its
// N-bit RNG in place of the LFSRs.
//
// In the circuit, a stochastic MTJ with a low-barrier free layer sits in
// series with an NMOS transistor (gate voltage V_IN) and a source resistor;
// a comparator against V_REF turns the fluctuating drain voltage into a
// bipolar output V_OUT = +-VDD/2. The time average follows
// <V_OUT> = VDD/2 * tanh(V_IN / V0), V0 being a device-dependent voltage.
// This model reproduces that behaviour: every TAU_NS nanoseconds (the
// magnet's fluctuation time, nanoseconds in the paper) the output takes a
// new value, +VDD/2 with probability (1 + tanh(V_IN/V0)) / 2 and -VDD/2
// otherwise. The tanh law and the bipolar output are the paper's; VDD, V0,
// TAU_NS and the memoryless switching at fixed intervals are this model's
// assumptions (a real s-MTJ has random dwell times). V_REF is accepted for
// completeness and assumed to sit at the comparator's balance point.
module smtj_pbit #(
  parameter real VDD    = 0.8,
  parameter real V0     = 0.05,
  parameter real TAU_NS = 1.0,
  parameter int  SEED   = 1
) (
  input  real  V_IN,
  input  real  V_REF,
  output real  V_OUT
);
  timeunit 1ns;
  timeprecision 1ps;

  int unsigned state;
  real         p;

  initial begin
    state = SEED;
    V_OUT = -VDD / 2.0;
    forever begin
      #(TAU_NS);
      p = (1.0 + $tanh(V_IN / V0)) / 2.0;
      // 32-bit xorshift as the thermal-noise source of the model
      state = state ^ (state << 13);
      state = state ^ (state >> 17);
      state = state ^ (state << 5);
      V_OUT = (real'(state) / 4294967296.0 < p) ? VDD / 2.0 : -VDD / 2.0;
    end
  end
endmodule
