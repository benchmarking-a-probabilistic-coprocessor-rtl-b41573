// knap_chain: one Markov chain of the 0-1 knapsack Metropolis sampler.
//
// State: the item vector x (N bits), its total weight and total value
// ("gold"). Every clock a new proposal enters the pipeline, even though a
// proposal takes three clocks to be decided, as in the paper: a proposal
// flips two items i and j chosen at random, and only their weights and
// values are needed to evaluate it.
//   stage 0  the RNG (two 16-bit index LFSRs and one 16-bit acceptance LFSR)
//            gives i = (r_i * n_items) >> 16, j likewise, and u;
//   stage 1  weight and value tables are read for i and j (registered);
//   stage 2  x_i and x_j are read from the *current* state, so the proposal
//            always starts from the latest accepted state (the feedback
//            from kernel to RNG). dW = sum of (x ? -W : +W), dV likewise.
//            "Weight <= max. weight": total_w + dW <= capacity.
//            "Gold > old gold": dV > 0 accepts outright; otherwise the
//            Metropolis test u < exp(dV/T) with the exponential read from a
//            256-entry table at e = min(255, (-dV * beta) >> 8), where beta
//            is the inverse temperature (host table, 16-bit probabilities).
//            Accepted: x_i, x_j flip and the totals update in the same clock.
// Because stage 2 reads the state it updates, consecutive proposals never
// act on a stale state. A proposal with i = j is rejected.
// The chain also tracks the best value reached, its weight and a copy of
// the state (best_x); new_best pulses when it improves.
// Start state: empty knapsack (all zero) after rst or clear.
// The paper gives the pipeline's blocks (dWeight/dGold calculation, the two
// comparisons, accept/reject, feedback); the index scaling, the table-based
// exponential, the rejection of i = j and the start state are this design's
// choices. The text says weight "smaller or equal" to the maximum, the
// figure prints "Weight < max. Weight?": the text is followed.
module knap_chain #(
  parameter int          N    = 8192,   // item capacity of the tables
  parameter int          VW   = 10,     // weight/value width (0..1000)
  parameter int          TW   = 24,     // total weight/value width
  parameter logic [31:0] SEED = 32'h1,
  localparam int IW = $clog2(N),
  localparam int AW = (IW > 8) ? IW : 8      // table write address width
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          clear,      // empty the knapsack, reset best
  // table load
  input  logic          we_w,
  input  logic          we_v,
  input  logic          we_e,
  input  logic [AW-1:0] waddr,
  input  logic [15:0]   wdata,
  // parameters
  input  logic [IW:0]   n_items,
  input  logic [TW-1:0] capacity,
  input  logic [15:0]   beta,
  input  logic          run,
  // state and results
  output logic [N-1:0]  x,
  output logic [TW-1:0] tot_w,
  output logic [TW-1:0] tot_v,
  output logic [N-1:0]  best_x,
  output logic [TW-1:0] best_w,
  output logic [TW-1:0] best_v,
  output logic          new_best,
  output logic          accepted,    // one proposal accepted this clock
  output logic          evaluated    // one proposal decided this clock
);
  logic [VW-1:0] wt [N];
  logic [VW-1:0] vt [N];
  logic [15:0]   et [256];

  always_ff @(posedge clk) begin
    if (we_w) wt[IW'(waddr)] <= VW'(wdata);
    if (we_v) vt[IW'(waddr)] <= VW'(wdata);
    if (we_e) et[waddr[7:0]] <= wdata;
  end

  // ---- stage 0: RNG ------------------------------------------------------
  logic [15:0] ri, rj, ru;
  lfsr #(.W(16), .SEED(SEED))                u_ri (.clk, .rst, .en(run), .q(ri));
  lfsr #(.W(16), .SEED(SEED ^ 32'h0000_5A5A)) u_rj (.clk, .rst, .en(run), .q(rj));
  lfsr #(.W(16), .SEED(SEED ^ 32'h0000_3C3C)) u_ru (.clk, .rst, .en(run), .q(ru));

  // ---- stage 1: indices, table read ---------------------------------------
  logic          v1, v2;
  logic [IW-1:0] i1, j1, i2, j2;
  logic [15:0]   u1, u2;
  logic [VW-1:0] wi, wj, vi, vj;

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
    end else begin
      v1 <= run;
      v2 <= v1 && run;
    end
    i1 <= IW'((32'(ri) * 32'(n_items)) >> 16);
    j1 <= IW'((32'(rj) * 32'(n_items)) >> 16);
    u1 <= ru;
    i2 <= i1;
    j2 <= j1;
    u2 <= u1;
    wi <= wt[i1];
    wj <= wt[j1];
    vi <= vt[i1];
    vj <= vt[j1];
  end

  // ---- stage 2: deltas, checks, accept/reject ------------------------------
  logic               xi, xj;
  logic signed [VW+2:0] dw, dv;
  logic [TW-1:0]      nw, nv;
  logic               w_ok, better, metro, acc;
  logic [31:0]        e_full;
  logic [7:0]         e_idx;

  always_comb begin
    xi     = x[i2];
    xj     = x[j2];
    dw     = (xi ? -(VW+3)'(wi) : (VW+3)'(wi)) + (xj ? -(VW+3)'(wj) : (VW+3)'(wj));
    dv     = (xi ? -(VW+3)'(vi) : (VW+3)'(vi)) + (xj ? -(VW+3)'(vj) : (VW+3)'(vj));
    nw     = tot_w + TW'(dw);
    nv     = tot_v + TW'(dv);
    w_ok   = (nw <= capacity) && !(dw < 0 && nw > tot_w);
    better = (dv > 0);
    e_full = (32'(-dv) * 32'(beta)) >> 8;
    e_idx  = (e_full > 32'd255) ? 8'd255 : e_full[7:0];
    metro  = (u2 < et[e_idx]);
    acc    = v2 && run && (i2 != j2) && w_ok && (better || metro);
  end

  assign accepted  = acc;
  assign evaluated = v2 && run;

  logic [N-1:0] x_next;
  always_comb begin
    x_next = x;
    if (acc) begin
      x_next[i2] = ~xi;
      x_next[j2] = ~xj;
    end
  end

  always_ff @(posedge clk) begin
    new_best <= 1'b0;
    if (rst || clear) begin
      x      <= '0;
      tot_w  <= '0;
      tot_v  <= '0;
      best_x <= '0;
      best_w <= '0;
      best_v <= '0;
    end else begin
      x <= x_next;
      if (acc) begin
        tot_w <= nw;
        tot_v <= nv;
        if (nv > best_v) begin
          best_v   <= nv;
          best_w   <= nw;
          best_x   <= x_next;
          new_best <= 1'b1;
        end
      end
    end
  end
endmodule
